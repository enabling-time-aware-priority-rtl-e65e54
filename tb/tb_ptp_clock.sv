// tb_ptp_clock: the hardware clock against an exact integer model.
//
// The model keeps the whole time as one 64-bit count of 2^-16 ns. Every
// clock it adds the period (and, on a step, the step in ns shifted up by
// 16); seconds and nanoseconds are the quotient and remainder by one second.
// A second accumulator gives the expected microsecond pulses. The test runs
// the default 6.4 ns period, then random rate trims and random positive and
// negative phase steps (large enough to cross second boundaries in both
// directions), checking time and pulse on every clock. It also checks that
// a phase step does not move the microsecond pulse.
module tb_ptp_clock;
  import tas_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [31:0] period, adj_ns;
  logic        period_wr, adj_wr, us_tick;
  logic [47:0] tod_sec;
  logic [29:0] tod_ns;

  ptp_clock dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  localparam longint ONE_S = 64'd1_000_000_000 << 16;
  longint t = 0, acc = 0;
  longint m_period = PTP_PERIOD_DEF;
  int ticks = 0, steps_neg = 0, steps_pos = 0, sec_down = 0;
  logic [47:0] last_sec = 0;

  always @(posedge clk) begin
    if (!rst) begin
      t = t + m_period;
      if (adj_wr) begin
        t = t + (longint'($signed(adj_ns)) <<< 16);
        if ($signed(adj_ns) < 0) steps_neg++; else steps_pos++;
      end
      acc = acc + m_period;
      if (acc >= (64'd1000 << 16)) begin acc = acc - (64'd1000 << 16); ticks++; end
      if (period_wr) m_period = longint'(period);
    end
  end

  // model pulse of the previous edge, compared after the edge
  bit exp_tick = 0;
  longint acc_prev = 0;
  always @(negedge clk) begin
    if (!rst) begin
      check(tod_sec == 48'(t / ONE_S), $sformatf("sec %0d exp %0d", tod_sec, t / ONE_S));
      check(tod_ns == 30'((t % ONE_S) >> 16), $sformatf("ns %0d exp %0d", tod_ns, (t % ONE_S) >> 16));
      check(us_tick == (acc < acc_prev), "microsecond pulse");
      if (tod_sec < last_sec) sec_down++;
      last_sec = tod_sec;
      acc_prev = acc;
    end
  end

  initial begin
    period = 0; adj_ns = 0; period_wr = 0; adj_wr = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // default rate: 157 clocks of 6.4 ns cover 1 us once
    repeat (2000) @(posedge clk);
    check(ticks == 12 || ticks == 13, $sformatf("ticks %0d at 6.4 ns", ticks));
    // jump close to the end of the first second, then run across it
    @(negedge clk); adj_ns = 32'd999_990_000; adj_wr = 1;
    @(negedge clk); adj_wr = 0;
    repeat (3000) @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      case ($urandom % 3)
        0: begin period = 32'h0004_0000 + ($urandom % 32'h0008_0000); period_wr = 1; end
        1: begin adj_ns = 32'($urandom % 900_000_000); adj_wr = 1; end
        default: begin adj_ns = -32'($urandom % 900_000_000); adj_wr = 1; end
      endcase
      @(negedge clk); period_wr = 0; adj_wr = 0;
      repeat ($urandom % 50) @(posedge clk);
      if (t < 2 * ONE_S) begin  // stay clear of time zero
        @(negedge clk); adj_ns = 32'd999_000_000; adj_wr = 1;
        @(negedge clk); adj_wr = 0;
      end
    end
    // a phase step must not move the microsecond pulse
    begin
      longint a0;
      int k0;
      @(negedge clk); period = 32'h0006_6666; period_wr = 1;
      @(negedge clk); period_wr = 0;
      a0 = acc; k0 = ticks;
      adj_ns = 32'd500_000; adj_wr = 1;
      @(negedge clk); adj_wr = 0;
      repeat (1000) @(posedge clk);
      @(negedge clk);
      check(ticks - k0 == int'((a0 + 1001 * 64'h6_6666) / (64'd1000 << 16)), "pulse unaffected by step");
    end
    check(steps_neg > 50 && steps_pos > 50, "steps both ways");
    check(sec_down > 0, "seconds stepped backwards");
    $display("ticks=%0d pos=%0d neg=%0d sec_down=%0d", ticks, steps_pos, steps_neg, sec_down);
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
