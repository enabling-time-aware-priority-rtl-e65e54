// tb_tas_csr: register file reached through its AXI4-Lite port.
//
// An AXI4-Lite master task drives address and data with independent random
// delays and holds the response ready back at random, as a real
// interconnect may. A model keeps what every register should hold. The test
// writes random values to random addresses (mapped registers of every port,
// holes in the map and the global page, the priority map included), then reads them back and compares
// both the read data and the configuration outputs seen by the schedulers.
// It also checks the PTP period/step strobes (one clock each, with the
// written value), the status and time read-only registers, and that a
// response is never dropped while the master keeps ready low.
module tb_tas_csr;
  import tas_pkg::*;

  localparam int P = 4, NQ = 32, NT = 8, NS = 8, QW = 5, TW = 3, SW = 3;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [15:0] s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;
  logic              cfg_en       [P];
  logic [SW:0]       cfg_nslots   [P];
  logic [US_W-1:0]   cfg_cycle_us [P];
  logic [US_W-1:0]   cfg_guard_us [P];
  logic [QW-1:0]     cfg_taq_base [P];
  logic [TW-1:0]     cfg_scr      [P][NS];
  logic [US_W-1:0]   cfg_tqcr     [P][NT];
  logic [QW-1:0]     cfg_prio_base[P][NUM_PRIO];
  logic [QW:0]       cfg_prio_cnt [P][NUM_PRIO];
  logic [31:0]       status       [P];
  logic [31:0]       ptp_period, ptp_adj;
  logic              ptp_period_wr, ptp_adj_wr;
  logic [47:0]       tod_sec;
  logic [29:0]       tod_ns;

  tas_csr dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  // model: every 32-bit register by address, with its width mask
  logic [31:0] model [logic [15:0]];
  function automatic logic [31:0] mask_of(logic [15:0] a);
    logic [11:0] o;
    o = a[11:0];
    if (a[15:12] == PAGE_GLOBAL) return (o == REG_PTP_PERIOD || o == REG_PTP_ADJ) ? 32'hFFFF_FFFF : 0;
    if (a[15:12] >= P || o[1:0] != 0) return 0;
    case (o)
      REG_CTRL: return 32'h1;
      REG_NSLOTS: return 32'((1 << (SW + 1)) - 1);
      REG_CYCLE_US, REG_GUARD_US: return 32'((1 << US_W) - 1);
      REG_TAQ_BASE: return 32'((1 << QW) - 1);
      default: ;
    endcase
    if (o >= REG_SCR0 && o < REG_SCR0 + 12'(4 * NS)) return 32'((1 << TW) - 1);
    if (o >= REG_TQCR0 && o < REG_TQCR0 + 12'(4 * NT)) return 32'((1 << US_W) - 1);
    if (o >= REG_PRIO0 && o < REG_PRIO0 + 12'(4 * NUM_PRIO))
      return {16'd0, 8'((1 << (QW + 1)) - 1), 8'((1 << QW) - 1)};
    return 0;
  endfunction

  function automatic logic [31:0] exp_read(logic [15:0] a);
    if (a[15:12] == PAGE_GLOBAL) begin
      if (a[11:0] == REG_PTP_NS) return {2'b00, tod_ns};
      if (a[11:0] == REG_PTP_SEC) return tod_sec[31:0];
      if (a[11:0] == REG_PTP_ADJ) return 0;  // write-only
    end else if (a[15:12] < P && a[11:0] == REG_STATUS)
      return status[a[15:12]];
    // priority map after reset: priority r fills queue r alone
    if (!model.exists(a) && a[15:12] < P && a[11:0] >= REG_PRIO0 && a[11:0] < REG_PRIO0 + 12'(4 * NUM_PRIO)
        && a[1:0] == 0)
      return 32'h0100 | 32'((a[11:0] - REG_PRIO0) >> 2);
    return model.exists(a) ? model[a] : 32'(a == {PAGE_GLOBAL, REG_PTP_PERIOD} ? PTP_PERIOD_DEF : 0);
  endfunction

  int per_strobes = 0, adj_strobes = 0;
  logic [31:0] last_per, last_adj;
  always @(posedge clk) begin
    if (ptp_period_wr) begin per_strobes++; last_per = ptp_period; end
    if (ptp_adj_wr) begin adj_strobes++; last_adj = ptp_adj; end
  end

  int bp_seen = 0;
  task automatic axi_write(input logic [15:0] a, input logic [31:0] d);
    fork
      begin
        repeat ($urandom % 3) @(posedge clk);
        s_axil_awaddr <= a; s_axil_awvalid <= 1;
        @(posedge clk iff s_axil_awready);
        s_axil_awvalid <= 0;
      end
      begin
        repeat ($urandom % 3) @(posedge clk);
        s_axil_wdata <= d; s_axil_wstrb <= 4'hF; s_axil_wvalid <= 1;
        @(posedge clk iff s_axil_wready);
        s_axil_wvalid <= 0;
      end
    join
    // hold the response back for a while
    repeat ($urandom % 4) begin
      @(posedge clk);
      if (s_axil_bvalid) bp_seen++;
    end
    s_axil_bready <= 1;
    @(posedge clk iff s_axil_bvalid);
    check(s_axil_bresp == 2'b00, "bresp");
    s_axil_bready <= 0;
    if (mask_of(a) != 0) model[a] = d & mask_of(a);
  endtask

  task automatic axi_read(input logic [15:0] a, output logic [31:0] d);
    repeat ($urandom % 3) @(posedge clk);
    s_axil_araddr <= a; s_axil_arvalid <= 1;
    @(posedge clk iff s_axil_arready);
    s_axil_arvalid <= 0;
    repeat ($urandom % 4) @(posedge clk);
    s_axil_rready <= 1;
    @(posedge clk iff s_axil_rvalid);
    d = s_axil_rdata;
    check(s_axil_rresp == 2'b00, "rresp");
    s_axil_rready <= 0;
  endtask

  function automatic logic [15:0] rand_addr();
    logic [11:0] o;
    logic [3:0] pg;
    pg = ($urandom % 4 == 0) ? PAGE_GLOBAL : 4'($urandom % (P + 1));
    case ($urandom % 4)
      0: o = 12'(4 * ($urandom % 7));
      1: o = (pg == PAGE_GLOBAL) ? 12'(4 * ($urandom % 4)) : REG_SCR0 + 12'(4 * ($urandom % (NS + 2)));
      2: o = ($urandom % 2) ? REG_TQCR0 + 12'(4 * ($urandom % (NT + 2)))
                            : REG_PRIO0 + 12'(4 * ($urandom % (NUM_PRIO + 2)));
      default: o = 12'($urandom) & 12'hFFC;
    endcase
    return {pg, o};
  endfunction

  task automatic check_outputs();
    for (int p = 0; p < P; p++) begin
      logic [15:0] b;
      b = 16'(p) << 12;
      check(cfg_en[p] == exp_read(b | 16'(REG_CTRL))[0], "cfg_en");
      check(32'(cfg_nslots[p]) == exp_read(b | 16'(REG_NSLOTS)), "cfg_nslots");
      check(32'(cfg_cycle_us[p]) == exp_read(b | 16'(REG_CYCLE_US)), "cfg_cycle_us");
      check(32'(cfg_guard_us[p]) == exp_read(b | 16'(REG_GUARD_US)), "cfg_guard_us");
      check(32'(cfg_taq_base[p]) == exp_read(b | 16'(REG_TAQ_BASE)), "cfg_taq_base");
      for (int i = 0; i < NS; i++)
        check(32'(cfg_scr[p][i]) == exp_read(b | 16'(REG_SCR0) | 16'(4 * i)), $sformatf("cfg_scr %0d %0d", p, i));
      for (int q = 0; q < NT; q++)
        check(32'(cfg_tqcr[p][q]) == exp_read(b | 16'(REG_TQCR0) | 16'(4 * q)), "cfg_tqcr");
      for (int r = 0; r < NUM_PRIO; r++)
        check({16'd0, 8'(cfg_prio_cnt[p][r]), 8'(cfg_prio_base[p][r])} ==
              exp_read(b | 16'(REG_PRIO0) | 16'(4 * r)), $sformatf("cfg_prio %0d %0d", p, r));
    end
  endtask

  // read-only inputs
  bit freeze = 0;
  always @(posedge clk) begin
    if (!freeze) begin
      for (int p = 0; p < P; p++) status[p] <= $urandom;
      tod_ns  <= 30'($urandom);
      tod_sec <= {16'h0, $urandom};
    end
  end

  initial begin
    logic [31:0] d;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0; s_axil_araddr = 0;
    for (int p = 0; p < P; p++) status[p] = 0;
    tod_ns = 0; tod_sec = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    check_outputs();
    // reset values read back
    axi_read({PAGE_GLOBAL, REG_PTP_PERIOD}, d);
    check(d == PTP_PERIOD_DEF, "period reset value");
    // random writes and reads
    for (int n = 0; n < 3000; n++) begin
      logic [15:0] a;
      a = rand_addr();
      if ($urandom % 2) begin
        int ps, as;
        logic [31:0] v;
        ps = per_strobes; as = adj_strobes;
        v = $urandom;
        axi_write(a, v);
        @(posedge clk);
        if (a == {PAGE_GLOBAL, REG_PTP_PERIOD}) check(per_strobes == ps + 1 && last_per == v, "period strobe");
        else check(per_strobes == ps, "no period strobe");
        if (a == {PAGE_GLOBAL, REG_PTP_ADJ}) check(adj_strobes == as + 1 && last_adj == v, "step strobe");
        else check(adj_strobes == as, "no step strobe");
        check_outputs();
      end else begin
        logic [31:0] e;
        // status and time are sampled at the edge that takes the address
        axi_read(a, d);
        if (!((a[15:12] == PAGE_GLOBAL && (a[11:0] == REG_PTP_NS || a[11:0] == REG_PTP_SEC)) ||
              (a[15:12] < P && a[11:0] == REG_STATUS))) begin
          e = exp_read(a);
          check(d == e, $sformatf("read %h got %h exp %h", a, d, e));
        end
      end
    end
    // read-only registers show live values: hold them still and read
    @(negedge clk);
    freeze = 1;
    status[2] = 32'hA5A5_0F0F; tod_ns = 30'd123_456_789; tod_sec = 48'd77;
    axi_read(16'h2000 | 16'(REG_STATUS), d);
    check(d == 32'hA5A5_0F0F, "status read");
    axi_read({PAGE_GLOBAL, REG_PTP_NS}, d);
    check(d == 32'd123_456_789, "time ns read");
    axi_read({PAGE_GLOBAL, REG_PTP_SEC}, d);
    check(d == 32'd77, "time s read");
    freeze = 0;
    check(bp_seen > 100, "responses held back");
    check(per_strobes > 5 && adj_strobes > 5, "strobes seen");
    $display("per=%0d adj=%0d held=%0d", per_strobes, adj_strobes, bp_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
