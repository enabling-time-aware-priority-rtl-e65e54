// tas_pkg: types, sizes and helper functions shared by the time-aware NIC.
//
// The design schedules transmission from many per-port TX queues using a
// table loaded by software: schedule entry i (an SCR, "schedule control
// register") names a queue of the time-aware group, and that queue's TQCR
// ("timeslot queue control register") holds how many microseconds the queue
// owns the port once its entry comes up. The entries are walked in order and
// the walk loops. This reading of the SCR/TQCR pair follows the paper's
// schedule table (Timeslot, TQCR, duration); the register offsets below are
// this design's own choice.
//
// Register map (AXI4-Lite, 32-bit registers, byte addresses):
//   page = addr[15:12]; pages 0..NUM_PORTS-1 are ports, page 0xF is global.
//   port page  0x000 CTRL      bit0 = time-aware schedule enabled
//              0x004 NSLOTS    number of schedule entries in use (1..NUM_SLOTS)
//              0x008 CYCLE_US  transmission window length in microseconds
//              0x00C GUARD_US  guardband before every slot end, microseconds
//              0x010 TAQ_BASE  first TX queue of the time-aware group
//              0x014 STATUS    read only: scheduler state (see tas_scheduler)
//              0x100 + 4*i     SCR[i]  (time-aware queue number, 0..NUM_TAQ-1)
//              0x200 + 4*q     TQCR[q] (slot duration of queue q, microseconds)
//              0x300 + 4*p     PRIO_MAP[p]: [7:0] first TX queue of priority p,
//                              [15:8] number of queues (0 counts as 1);
//                              resets to one queue, queue p
//   global     0x000 PTP_PERIOD  clock period in ns, 16.16 fixed point
//              0x004 PTP_ADJ     write: signed nanosecond step of the clock
//              0x008 PTP_NS      read: nanoseconds of the clock
//              0x00C PTP_SEC     read: seconds (low 32 bits)
package tas_pkg;

  // Sizes shared by several modules. Modules take them as parameters whose
  // defaults come from here.
  localparam int unsigned NUM_PORTS_DEF = 4;   // four QSFP ports per node
  localparam int unsigned NUM_TXQ_DEF   = 32;  // TX queues per port
  localparam int unsigned NUM_TAQ_DEF   = 8;   // queues in the time-aware group
  localparam int unsigned NUM_SLOTS_DEF = 8;   // schedule entries per port
  localparam int unsigned NUM_PRIO      = 8;   // traffic priorities 0..7
  localparam int unsigned DATA_W        = 64;  // stream width (10G at 156.25 MHz)
  localparam int unsigned KEEP_W        = DATA_W / 8;
  localparam int unsigned ADDR_W        = 32;  // host buffer address
  localparam int unsigned LEN_W         = 16;  // frame length in bytes
  localparam int unsigned US_W          = 20;  // microsecond counters (about 1 s)

  // Byte offsets inside a port page.
  localparam logic [11:0] REG_CTRL     = 12'h000;
  localparam logic [11:0] REG_NSLOTS   = 12'h004;
  localparam logic [11:0] REG_CYCLE_US = 12'h008;
  localparam logic [11:0] REG_GUARD_US = 12'h00C;
  localparam logic [11:0] REG_TAQ_BASE = 12'h010;
  localparam logic [11:0] REG_STATUS   = 12'h014;
  localparam logic [11:0] REG_SCR0     = 12'h100;
  localparam logic [11:0] REG_TQCR0    = 12'h200;
  localparam logic [11:0] REG_PRIO0    = 12'h300;  // [7:0] first queue, [15:8] queue count
  // Byte offsets inside the global page.
  localparam logic [3:0]  PAGE_GLOBAL    = 4'hF;
  localparam logic [11:0] REG_PTP_PERIOD = 12'h000;
  localparam logic [11:0] REG_PTP_ADJ    = 12'h004;
  localparam logic [11:0] REG_PTP_NS     = 12'h008;
  localparam logic [11:0] REG_PTP_SEC    = 12'h00C;

  // 6.4 ns (156.25 MHz) in 16.16 fixed point.
  localparam logic [31:0] PTP_PERIOD_DEF = 32'h0006_6666;

  // Frame pointer kept in a TX or RX queue.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;  // byte address of the frame, 8-byte aligned
    logic [LEN_W-1:0]  len;   // frame length in bytes (without FCS)
  } desc_t;

  // Value of CRC-32 register (before the final inversion) after a frame and
  // its own FCS have been run through it: the standard Ethernet residue.
  localparam logic [31:0] CRC_RESIDUE = 32'hDEBB20E3;

  // One byte of the reflected IEEE 802.3 CRC-32 (polynomial 0x04C11DB7,
  // reflected form 0xEDB88320). The register starts at all ones and the FCS
  // is its inverse, least significant byte first on the wire.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc ^ {24'd0, d};
    for (int b = 0; b < 8; b++) begin
      c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    end
    return c;
  endfunction

  // Run the bytes of one stream beat whose keep bit is set (keep is
  // contiguous from byte 0) through the CRC register.
  function automatic logic [31:0] crc32_beat(input logic [31:0] crc,
                                            input logic [DATA_W-1:0] data,
                                            input logic [KEEP_W-1:0] keep);
    logic [31:0] c;
    c = crc;
    for (int i = 0; i < KEEP_W; i++) begin
      if (keep[i]) c = crc32_byte(c, data[8*i +: 8]);
    end
    return c;
  endfunction

  // Number of set bits of a contiguous keep mask.
  function automatic logic [3:0] keep_bytes(input logic [KEEP_W-1:0] keep);
    logic [3:0] n;
    n = '0;
    for (int i = 0; i < KEEP_W; i++) n += {3'd0, keep[i]};
    return n;
  endfunction

endpackage
