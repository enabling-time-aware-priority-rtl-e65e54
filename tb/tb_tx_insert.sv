// tb_tx_insert: priority-to-queue insertion against a reference model.
//
// The testbench programs a priority map with ranges of one to four queues
// (one of them running past the last queue and wrapping to queue 0, one with
// a zero count meaning one queue), then offers random pointers with random
// priorities while the queue side accepts at random. For every offered
// pointer it checks the chosen queue against a model that keeps one
// round-robin position per priority and moves it only when the pointer is
// taken; it also checks that valid, ready and the pointer pass straight
// through. Midway the map is reprogrammed with smaller ranges, so positions
// beyond a new range must restart at its first queue.
module tb_tx_insert;
  import tas_pkg::*;

  localparam int NQ = 32, QW = 5, PW = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic          s_valid, s_ready, push_valid, push_ready;
  logic [PW-1:0] s_prio;
  desc_t         s_desc, push_desc;
  logic [QW-1:0] push_q;
  logic [QW-1:0] cfg_prio_base [NUM_PRIO];
  logic [QW:0]   cfg_prio_cnt  [NUM_PRIO];

  tx_insert #(.NUM_TXQ(NQ)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  int off [NUM_PRIO];
  int taken = 0, refused = 0, wrapped = 0, restarted = 0;

  function automatic int cnt_of(int r);
    return (cfg_prio_cnt[r] == 0) ? 1 : int'(cfg_prio_cnt[r]);
  endfunction

  task automatic run(input int cycles);
    for (int c = 0; c < cycles; c++) begin
      int r, o, q;
      @(negedge clk);
      s_valid    = ($urandom % 4) != 0;
      s_prio     = PW'($urandom);
      s_desc     = '{addr: $urandom, len: 16'($urandom)};
      push_ready = ($urandom % 3) != 0;
      #1;
      r = s_prio;
      o = (off[r] >= cnt_of(r)) ? 0 : off[r];
      if (off[r] >= cnt_of(r) && s_valid) restarted++;
      q = (int'(cfg_prio_base[r]) + o) % NQ;
      check(push_valid == s_valid, "valid passes through");
      check(s_ready == push_ready, "ready passes through");
      check(push_desc == s_desc, "pointer passes through");
      if (s_valid) check(push_q == QW'(q), $sformatf("prio %0d queue %0d exp %0d", r, push_q, q));
      @(posedge clk);
      if (s_valid && push_ready) begin
        taken++;
        if (int'(cfg_prio_base[r]) + o >= NQ) wrapped++;
        off[r] = (o + 1 >= cnt_of(r)) ? 0 : o + 1;
      end else if (s_valid) refused++;
    end
  endtask

  initial begin
    s_valid = 0; s_prio = 0; s_desc = '0; push_ready = 0;
    for (int r = 0; r < NUM_PRIO; r++) begin
      off[r] = 0;
      cfg_prio_base[r] = QW'(4 * r);
      cfg_prio_cnt[r]  = (QW+1)'(1 + r % 4);
    end
    cfg_prio_base[7] = 30;  // 30, 31, 0, 1
    cfg_prio_cnt[7]  = 4;
    cfg_prio_cnt[5]  = 0;   // zero means one queue
    repeat (3) @(posedge clk);
    rst = 0;
    run(3000);
    // smaller ranges: stale positions restart at the first queue
    @(negedge clk);
    for (int r = 0; r < NUM_PRIO; r++) cfg_prio_cnt[r] = (QW+1)'(1 + (r % 4) / 2);
    run(3000);
    check(taken > 3000 && refused > 500, "traffic taken and held back");
    check(wrapped > 0, "range wrapped past the last queue");
    check(restarted > 0, "position beyond a shrunk range");
    $display("taken=%0d refused=%0d wrapped=%0d restarted=%0d", taken, refused, wrapped, restarted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
