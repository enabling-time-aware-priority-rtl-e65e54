// tb_queue_bank: random pushes and pops against per-queue reference FIFOs.
//
// Each clock a random queue may be pushed with a random pointer and a random
// queue popped. The testbench keeps one SystemVerilog queue per hardware
// queue and checks the head shown on pop_desc, the non-empty and full flags,
// push_ready, and that a push to a full queue is refused. Pushing and popping
// the same queue in one clock is exercised as well.
module tb_queue_bank;
  import tas_pkg::*;

  localparam int NQ = 8, D = 4, QW = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic          push_valid, push_ready, pop_en;
  logic [QW-1:0] push_q, pop_q;
  desc_t         push_desc, pop_desc;
  logic [NQ-1:0] nonempty, full;

  queue_bank #(.NUM_Q(NQ), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  desc_t model [NQ][$];
  int pushes = 0, pops = 0, refused = 0, same = 0;

  initial begin
    push_valid = 0; pop_en = 0; push_q = 0; pop_q = 0; push_desc = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // check state
      for (int q = 0; q < NQ; q++) begin
        check(nonempty[q] == (model[q].size() != 0), $sformatf("nonempty q%0d dut %0d model %0d cnt %0d", q, nonempty[q], model[q].size(), dut.count[q]));
        check(full[q] == (model[q].size() == D), "full");
      end
      // drive
      push_valid = ($urandom % 2) != 0;
      push_q     = QW'($urandom);
      push_desc  = '{addr: $urandom, len: 16'($urandom)};
      pop_en     = ($urandom % 3) != 0;
      pop_q      = (cyc % 7 == 0) ? push_q : QW'($urandom);
      #1;
      check(push_ready == (model[push_q].size() != D), "push_ready");
      if (model[pop_q].size() != 0) check(pop_desc == model[pop_q][0], "head");
      @(posedge clk);
      begin
        bit acc;
        acc = push_valid && model[push_q].size() < D;  // full is judged before the pop
        if (push_valid && !acc) refused++;
        if (pop_en && model[pop_q].size() != 0) begin void'(model[pop_q].pop_front()); pops++; end
        if (acc) begin model[push_q].push_back(push_desc); pushes++; end
      end
      if (push_valid && pop_en && push_q == pop_q) same++;
    end
    check(refused > 0 && pushes > 100 && pops > 100 && same > 0, "coverage");
    $display("pushes=%0d pops=%0d refused=%0d same=%0d", pushes, pops, refused, same);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
