// tas_nic: NIC core of one compute node with time-aware TX scheduling.
//
// A compute node has several Ethernet ports. Each port transmits from many
// TX queues; software maps traffic priorities to queues, and a time-aware
// scheduler per port gives chosen queues fixed shares of every transmission
// window (their timeslots), which fixes the share of the link bandwidth each
// priority gets. The ports run independently, each with its own schedule;
// all of them share one PTP-synchronised clock, whose microsecond pulse
// times the slots, and one AXI4-Lite register file.
//
// Per port (generate loop):
//   TX: host pushes frame pointers with a priority -> tx_insert picks the
//       TX queue from the priority map -> queue_bank (TX queues) -> tas_scheduler
//       picks the queue -> tx_engine pops the pointer and copies the frame
//       from memory -> tx_fcs_ts appends FCS, timestamps -> serializer port.
//   RX: deserializer port -> rx_frame_buffer (CRC check, drop, timestamp)
//       -> rx_engine copies to memory -> queue_bank (RX queues) -> host pops;
//       irq pulses per RX queue.
// Serializer/deserializer (MAC, PCS, transceivers) and host memory are
// outside this module; their sides appear as ports. The port count follows
// the four QSFP ports of the evaluated board; queue counts, depths and
// widths are this design's choices.
//
// Interface conventions: all arrays are indexed by port; every valid/ready
// pair is a handshake taken when both are high at a clock edge. Single clock
// (156.25 MHz intended for a 64-bit 10 Gb/s stream), synchronous reset.
module tas_nic
  import tas_pkg::*;
#(
  parameter int unsigned NUM_PORTS   = NUM_PORTS_DEF,
  parameter int unsigned NUM_TXQ     = NUM_TXQ_DEF,
  parameter int unsigned NUM_TAQ     = NUM_TAQ_DEF,
  parameter int unsigned NUM_SLOTS   = NUM_SLOTS_DEF,
  parameter int unsigned NUM_RXQ     = 4,
  parameter int unsigned TXQ_DEPTH   = 16,
  parameter int unsigned RXQ_DEPTH   = 16,
  parameter int unsigned RXBUF_WORDS = 512,
  localparam int unsigned QW  = $clog2(NUM_TXQ),
  localparam int unsigned PW  = $clog2(NUM_PRIO),
  localparam int unsigned RQW = (NUM_RXQ > 1) ? $clog2(NUM_RXQ) : 1
) (
  input  logic               clk,
  input  logic               rst,
  // register access
  input  logic [15:0]        s_axil_awaddr,
  input  logic               s_axil_awvalid,
  output logic               s_axil_awready,
  input  logic [31:0]        s_axil_wdata,
  input  logic [3:0]         s_axil_wstrb,
  input  logic               s_axil_wvalid,
  output logic               s_axil_wready,
  output logic [1:0]         s_axil_bresp,
  output logic               s_axil_bvalid,
  input  logic               s_axil_bready,
  input  logic [15:0]        s_axil_araddr,
  input  logic               s_axil_arvalid,
  output logic               s_axil_arready,
  output logic [31:0]        s_axil_rdata,
  output logic [1:0]         s_axil_rresp,
  output logic               s_axil_rvalid,
  input  logic               s_axil_rready,
  // host: TX pointer insertion
  input  logic               txq_push_valid [NUM_PORTS],
  output logic               txq_push_ready [NUM_PORTS],
  input  logic [PW-1:0]      txq_push_prio  [NUM_PORTS],
  input  desc_t              txq_push_desc  [NUM_PORTS],
  // host memory: frame reads for TX
  output logic               rd_req_valid [NUM_PORTS],
  output logic [ADDR_W-1:0]  rd_req_addr  [NUM_PORTS],
  input  logic               rd_req_ready [NUM_PORTS],
  input  logic               rd_rsp_valid [NUM_PORTS],
  input  logic [DATA_W-1:0]  rd_rsp_data  [NUM_PORTS],
  // serializer side (frames with FCS)
  output logic [DATA_W-1:0]  tx_axis_tdata  [NUM_PORTS],
  output logic [KEEP_W-1:0]  tx_axis_tkeep  [NUM_PORTS],
  output logic               tx_axis_tlast  [NUM_PORTS],
  output logic               tx_axis_tvalid [NUM_PORTS],
  input  logic               tx_axis_tready [NUM_PORTS],
  output logic               tx_ts_valid    [NUM_PORTS],
  output logic [47:0]        tx_ts_sec      [NUM_PORTS],
  output logic [29:0]        tx_ts_ns       [NUM_PORTS],
  output logic [QW-1:0]      tx_queue       [NUM_PORTS],  // queue of the frame being sent
  // deserializer side (frames with FCS)
  input  logic [DATA_W-1:0]  rx_axis_tdata  [NUM_PORTS],
  input  logic [KEEP_W-1:0]  rx_axis_tkeep  [NUM_PORTS],
  input  logic               rx_axis_tlast  [NUM_PORTS],
  input  logic               rx_axis_tvalid [NUM_PORTS],
  // host: free RX buffers
  input  logic               free_valid [NUM_PORTS],
  input  logic [ADDR_W-1:0]  free_addr  [NUM_PORTS],
  output logic               free_ready [NUM_PORTS],
  // host memory: frame writes for RX
  output logic               wr_valid [NUM_PORTS],
  output logic [ADDR_W-1:0]  wr_addr  [NUM_PORTS],
  output logic [DATA_W-1:0]  wr_data  [NUM_PORTS],
  output logic [KEEP_W-1:0]  wr_strb  [NUM_PORTS],
  input  logic               wr_ready [NUM_PORTS],
  // host: RX pointer removal and interrupts
  input  logic               rxq_pop_en    [NUM_PORTS],
  input  logic [RQW-1:0]     rxq_pop_q     [NUM_PORTS],
  output desc_t              rxq_pop_desc  [NUM_PORTS],
  output logic [NUM_RXQ-1:0] rxq_nonempty  [NUM_PORTS],
  output logic [NUM_RXQ-1:0] irq           [NUM_PORTS],
  // observation
  output logic               slot_start [NUM_PORTS],
  output logic               in_guard   [NUM_PORTS],
  output logic [1:0]         sched_phase[NUM_PORTS],
  output logic               rx_drop_crc[NUM_PORTS],
  output logic               rx_drop_ovf[NUM_PORTS],
  output logic               us_tick
);

  localparam int unsigned TW = $clog2(NUM_TAQ);
  localparam int unsigned SW = $clog2(NUM_SLOTS);

  // shared clock and registers
  logic [47:0]     tod_sec;
  logic [29:0]     tod_ns;
  logic [31:0]     ptp_period, ptp_adj;
  logic            ptp_period_wr, ptp_adj_wr;

  logic            cfg_en       [NUM_PORTS];
  logic [SW:0]     cfg_nslots   [NUM_PORTS];
  logic [US_W-1:0] cfg_cycle_us [NUM_PORTS];
  logic [US_W-1:0] cfg_guard_us [NUM_PORTS];
  logic [QW-1:0]   cfg_taq_base [NUM_PORTS];
  logic [TW-1:0]   cfg_scr      [NUM_PORTS][NUM_SLOTS];
  logic [US_W-1:0] cfg_tqcr     [NUM_PORTS][NUM_TAQ];
  logic [31:0]     status       [NUM_PORTS];
  logic [QW-1:0]   cfg_prio_base[NUM_PORTS][NUM_PRIO];
  logic [QW:0]     cfg_prio_cnt [NUM_PORTS][NUM_PRIO];

  ptp_clock u_ptp (
    .clk, .rst,
    .period(ptp_period), .period_wr(ptp_period_wr),
    .adj_ns(ptp_adj), .adj_wr(ptp_adj_wr),
    .tod_sec, .tod_ns, .us_tick
  );

  tas_csr #(.NUM_PORTS(NUM_PORTS), .NUM_TXQ(NUM_TXQ), .NUM_TAQ(NUM_TAQ), .NUM_SLOTS(NUM_SLOTS)) u_csr (
    .clk, .rst,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wstrb,
    .s_axil_wvalid, .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready, .s_axil_rdata, .s_axil_rresp,
    .s_axil_rvalid, .s_axil_rready,
    .cfg_en, .cfg_nslots, .cfg_cycle_us, .cfg_guard_us, .cfg_taq_base, .cfg_scr, .cfg_tqcr,
    .cfg_prio_base, .cfg_prio_cnt, .status,
    .ptp_period, .ptp_period_wr, .ptp_adj, .ptp_adj_wr, .tod_sec, .tod_ns
  );

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    // ------------------------------------------------------------------ TX
    logic [NUM_TXQ-1:0] q_nonempty, q_full;
    logic               grant_valid, grant_ready, pop_en;
    logic [QW-1:0]      grant_queue, pop_q;
    desc_t              pop_desc;
    logic [DATA_W-1:0]  e_tdata;
    logic [KEEP_W-1:0]  e_tkeep;
    logic               e_tlast, e_tvalid, e_tready, e_busy;
    logic               ins_valid, ins_ready;
    logic [QW-1:0]      ins_q;
    desc_t              ins_desc;

    tx_insert #(.NUM_TXQ(NUM_TXQ)) u_ins (
      .clk, .rst,
      .s_valid(txq_push_valid[p]), .s_ready(txq_push_ready[p]),
      .s_prio(txq_push_prio[p]), .s_desc(txq_push_desc[p]),
      .cfg_prio_base(cfg_prio_base[p]), .cfg_prio_cnt(cfg_prio_cnt[p]),
      .push_valid(ins_valid), .push_ready(ins_ready), .push_q(ins_q), .push_desc(ins_desc)
    );

    queue_bank #(.NUM_Q(NUM_TXQ), .DEPTH(TXQ_DEPTH)) u_txq (
      .clk, .rst,
      .push_valid(ins_valid), .push_ready(ins_ready),
      .push_q(ins_q), .push_desc(ins_desc),
      .pop_en, .pop_q, .pop_desc,
      .nonempty(q_nonempty), .full(q_full)
    );

    tas_scheduler #(.NUM_TXQ(NUM_TXQ), .NUM_TAQ(NUM_TAQ), .NUM_SLOTS(NUM_SLOTS)) u_sched (
      .clk, .rst, .us_tick,
      .cfg_en(cfg_en[p]), .cfg_nslots(cfg_nslots[p]), .cfg_cycle_us(cfg_cycle_us[p]),
      .cfg_guard_us(cfg_guard_us[p]), .cfg_taq_base(cfg_taq_base[p]),
      .cfg_scr(cfg_scr[p]), .cfg_tqcr(cfg_tqcr[p]),
      .q_nonempty, .grant_valid, .grant_queue, .grant_ready,
      .slot_start(slot_start[p]), .in_guard(in_guard[p]), .phase(sched_phase[p]),
      .status(status[p])
    );

    tx_engine #(.NUM_TXQ(NUM_TXQ)) u_txe (
      .clk, .rst,
      .grant_valid, .grant_queue, .grant_ready,
      .pop_en, .pop_q, .pop_desc,
      .rd_req_valid(rd_req_valid[p]), .rd_req_addr(rd_req_addr[p]), .rd_req_ready(rd_req_ready[p]),
      .rd_rsp_valid(rd_rsp_valid[p]), .rd_rsp_data(rd_rsp_data[p]),
      .m_axis_tdata(e_tdata), .m_axis_tkeep(e_tkeep), .m_axis_tlast(e_tlast),
      .m_axis_tvalid(e_tvalid), .m_axis_tready(e_tready),
      .busy(e_busy), .cur_queue(tx_queue[p])
    );

    tx_fcs_ts u_fcs (
      .clk, .rst,
      .s_axis_tdata(e_tdata), .s_axis_tkeep(e_tkeep), .s_axis_tlast(e_tlast),
      .s_axis_tvalid(e_tvalid), .s_axis_tready(e_tready),
      .m_axis_tdata(tx_axis_tdata[p]), .m_axis_tkeep(tx_axis_tkeep[p]),
      .m_axis_tlast(tx_axis_tlast[p]), .m_axis_tvalid(tx_axis_tvalid[p]),
      .m_axis_tready(tx_axis_tready[p]),
      .tod_sec, .tod_ns,
      .ts_valid(tx_ts_valid[p]), .ts_sec(tx_ts_sec[p]), .ts_ns(tx_ts_ns[p])
    );

    // ------------------------------------------------------------------ RX
    logic              info_valid, info_ready, rd_en;
    logic [LEN_W-1:0]  info_len, info_words;
    logic [47:0]       info_ts_sec;
    logic [29:0]       info_ts_ns;
    logic [DATA_W-1:0] rb_data;
    logic              rxq_push_valid, rxq_push_ready;
    logic [RQW-1:0]    rxq_push_q;
    desc_t             rxq_push_desc;
    logic [NUM_RXQ-1:0] rxq_full;

    rx_frame_buffer #(.BUF_WORDS(RXBUF_WORDS)) u_rxb (
      .clk, .rst,
      .s_axis_tdata(rx_axis_tdata[p]), .s_axis_tkeep(rx_axis_tkeep[p]),
      .s_axis_tlast(rx_axis_tlast[p]), .s_axis_tvalid(rx_axis_tvalid[p]),
      .tod_sec, .tod_ns,
      .info_valid, .info_len, .info_words, .info_ts_sec, .info_ts_ns, .info_ready,
      .rd_data(rb_data), .rd_en,
      .drop_crc(rx_drop_crc[p]), .drop_ovf(rx_drop_ovf[p])
    );

    rx_engine #(.NUM_RXQ(NUM_RXQ)) u_rxe (
      .clk, .rst,
      .info_valid, .info_len, .info_words, .info_ts_sec, .info_ts_ns, .info_ready,
      .rd_data(rb_data), .rd_en,
      .free_valid(free_valid[p]), .free_addr(free_addr[p]), .free_ready(free_ready[p]),
      .wr_valid(wr_valid[p]), .wr_addr(wr_addr[p]), .wr_data(wr_data[p]),
      .wr_strb(wr_strb[p]), .wr_ready(wr_ready[p]),
      .rxq_push_valid, .rxq_push_q, .rxq_push_desc, .rxq_push_ready,
      .irq(irq[p])
    );

    queue_bank #(.NUM_Q(NUM_RXQ), .DEPTH(RXQ_DEPTH)) u_rxq (
      .clk, .rst,
      .push_valid(rxq_push_valid), .push_ready(rxq_push_ready),
      .push_q(rxq_push_q), .push_desc(rxq_push_desc),
      .pop_en(rxq_pop_en[p]), .pop_q(rxq_pop_q[p]), .pop_desc(rxq_pop_desc[p]),
      .nonempty(rxq_nonempty[p]), .full(rxq_full)
    );

    logic unused;
    assign unused = ^{q_full, e_busy, rxq_full};
  end

endmodule
