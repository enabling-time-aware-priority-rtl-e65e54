// tas_csr: AXI4-Lite register file of the time-aware scheduler and PTP clock.
//
// Software programs the transmission schedule of every port through these
// registers (the runtime's set_conf writes them, get_conf reads them back):
// per port the enable bit, the number of schedule entries, the window
// length, the guardband, the first queue of the time-aware group, the SCR
// table (which time-aware queue each entry serves, i.e. the looping order),
// the TQCR table (each time-aware queue's slot length in microseconds) and
// the priority map (which TX queues each traffic priority fills). A global
// page gives access to the PTP clock's period and phase step and
// reads its time. That the TQCRs have microsecond granularity and that all
// configuration sits on the AXI bus follows the paper; the address map (see
// tas_pkg) and the reset values (schedule disabled, plain round-robin, and
// priority p mapped to TX queue p alone) are this design's choices.
//
// How. One write and one read channel, each handling a single transaction
// at a time: a write is taken when address and data are both valid and the
// previous response has been accepted; a read returns its data one clock
// after the address is taken. Every access answers OKAY; unmapped addresses
// read as zero and ignore writes. Byte strobes are ignored (whole registers).
//
// Timing. Configuration outputs are registers and change one clock after
// the write is taken. ptp_period_wr / ptp_adj_wr are one-clock strobes.
module tas_csr
  import tas_pkg::*;
#(
  parameter int unsigned NUM_PORTS = NUM_PORTS_DEF,
  parameter int unsigned NUM_TXQ   = NUM_TXQ_DEF,
  parameter int unsigned NUM_TAQ   = NUM_TAQ_DEF,
  parameter int unsigned NUM_SLOTS = NUM_SLOTS_DEF,
  localparam int unsigned QW = $clog2(NUM_TXQ),
  localparam int unsigned TW = $clog2(NUM_TAQ),
  localparam int unsigned SW = $clog2(NUM_SLOTS)
) (
  input  logic               clk,
  input  logic               rst,
  // AXI4-Lite slave
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
  // per-port schedule configuration
  output logic               cfg_en       [NUM_PORTS],
  output logic [SW:0]        cfg_nslots   [NUM_PORTS],
  output logic [US_W-1:0]    cfg_cycle_us [NUM_PORTS],
  output logic [US_W-1:0]    cfg_guard_us [NUM_PORTS],
  output logic [QW-1:0]      cfg_taq_base [NUM_PORTS],
  output logic [TW-1:0]      cfg_scr      [NUM_PORTS][NUM_SLOTS],
  output logic [US_W-1:0]    cfg_tqcr     [NUM_PORTS][NUM_TAQ],
  output logic [QW-1:0]      cfg_prio_base[NUM_PORTS][NUM_PRIO],
  output logic [QW:0]        cfg_prio_cnt [NUM_PORTS][NUM_PRIO],
  input  logic [31:0]        status       [NUM_PORTS],
  // PTP clock
  output logic [31:0]        ptp_period,
  output logic               ptp_period_wr,
  output logic [31:0]        ptp_adj,
  output logic               ptp_adj_wr,
  input  logic [47:0]        tod_sec,
  input  logic [29:0]        tod_ns
);

  // ---------------------------------------------------------------- writes
  logic        wr_take;
  logic [3:0]  wpage;
  logic [11:0] woff;
  int unsigned wsel;

  assign wr_take        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_take;
  assign s_axil_wready  = wr_take;
  assign s_axil_bresp   = 2'b00;
  assign wpage          = s_axil_awaddr[15:12];
  assign woff           = s_axil_awaddr[11:0];
  assign wsel           = 32'(woff[11:2] & 10'h03F);  // entry number inside a table

  always_ff @(posedge clk) begin
    if (rst) begin
      s_axil_bvalid <= 1'b0;
      ptp_period    <= PTP_PERIOD_DEF;
      ptp_period_wr <= 1'b0;
      ptp_adj       <= '0;
      ptp_adj_wr    <= 1'b0;
      for (int p = 0; p < NUM_PORTS; p++) begin
        cfg_en[p]       <= 1'b0;
        cfg_nslots[p]   <= '0;
        cfg_cycle_us[p] <= '0;
        cfg_guard_us[p] <= '0;
        cfg_taq_base[p] <= '0;
        for (int i = 0; i < NUM_SLOTS; i++) cfg_scr[p][i]  <= '0;
        for (int q = 0; q < NUM_TAQ; q++)   cfg_tqcr[p][q] <= '0;
        for (int r = 0; r < NUM_PRIO; r++) begin
          cfg_prio_base[p][r] <= QW'(r);
          cfg_prio_cnt[p][r]  <= (QW+1)'(1);
        end
      end
    end else begin
      ptp_period_wr <= 1'b0;
      ptp_adj_wr    <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_take) begin
        s_axil_bvalid <= 1'b1;
        if (wpage == PAGE_GLOBAL) begin
          case (woff)
            REG_PTP_PERIOD: begin ptp_period <= s_axil_wdata; ptp_period_wr <= 1'b1; end
            REG_PTP_ADJ:    begin ptp_adj    <= s_axil_wdata; ptp_adj_wr    <= 1'b1; end
            default: ;
          endcase
        end else begin
          for (int p = 0; p < NUM_PORTS; p++) begin
            if (wpage == 4'(p)) begin
              case (woff)
                REG_CTRL:     cfg_en[p]       <= s_axil_wdata[0];
                REG_NSLOTS:   cfg_nslots[p]   <= (SW+1)'(s_axil_wdata);
                REG_CYCLE_US: cfg_cycle_us[p] <= US_W'(s_axil_wdata);
                REG_GUARD_US: cfg_guard_us[p] <= US_W'(s_axil_wdata);
                REG_TAQ_BASE: cfg_taq_base[p] <= QW'(s_axil_wdata);
                default: begin
                  if (woff[11:8] == REG_SCR0[11:8] && wsel < NUM_SLOTS)
                    cfg_scr[p][wsel] <= TW'(s_axil_wdata);
                  if (woff[11:8] == REG_TQCR0[11:8] && wsel < NUM_TAQ)
                    cfg_tqcr[p][wsel] <= US_W'(s_axil_wdata);
                  if (woff[11:8] == REG_PRIO0[11:8] && wsel < NUM_PRIO) begin
                    cfg_prio_base[p][wsel] <= QW'(s_axil_wdata[7:0]);
                    cfg_prio_cnt[p][wsel]  <= (QW+1)'(s_axil_wdata[15:8]);
                  end
                end
              endcase
            end
          end
        end
      end
    end
  end

  // ----------------------------------------------------------------- reads
  logic [3:0]  rpage;
  logic [11:0] roff;
  int unsigned rsel;
  logic [31:0] rval;

  assign s_axil_arready = !s_axil_rvalid;
  assign s_axil_rresp   = 2'b00;
  assign rpage          = s_axil_araddr[15:12];
  assign roff           = s_axil_araddr[11:0];
  assign rsel           = 32'(roff[11:2] & 10'h03F);

  always_comb begin
    rval = '0;
    if (rpage == PAGE_GLOBAL) begin
      case (roff)
        REG_PTP_PERIOD: rval = ptp_period;
        REG_PTP_NS:     rval = {2'b00, tod_ns};
        REG_PTP_SEC:    rval = tod_sec[31:0];
        default: ;
      endcase
    end else begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        if (rpage == 4'(p)) begin
          case (roff)
            REG_CTRL:     rval = {31'd0, cfg_en[p]};
            REG_NSLOTS:   rval = 32'(cfg_nslots[p]);
            REG_CYCLE_US: rval = 32'(cfg_cycle_us[p]);
            REG_GUARD_US: rval = 32'(cfg_guard_us[p]);
            REG_TAQ_BASE: rval = 32'(cfg_taq_base[p]);
            REG_STATUS:   rval = status[p];
            default: begin
              if (roff[11:8] == REG_SCR0[11:8] && rsel < NUM_SLOTS)
                rval = 32'(cfg_scr[p][rsel]);
              if (roff[11:8] == REG_TQCR0[11:8] && rsel < NUM_TAQ)
                rval = 32'(cfg_tqcr[p][rsel]);
              if (roff[11:8] == REG_PRIO0[11:8] && rsel < NUM_PRIO)
                rval = {16'd0, 8'(cfg_prio_cnt[p][rsel]), 8'(cfg_prio_base[p][rsel])};
            end
          endcase
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= rval;
      end
    end
  end

  logic unused;
  assign unused = ^{s_axil_wstrb, tod_sec[47:32], woff[1:0], roff[1:0]};

  // AXI4-Lite: a response stays valid until accepted.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (rst)
      (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (rst)
      (s_axil_rvalid && !s_axil_rready) |=> (s_axil_rvalid && $stable(s_axil_rdata)));

endmodule
