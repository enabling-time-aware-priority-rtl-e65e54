// tb_rx_engine: received frames must land in host buffers and be queued.
//
// The testbench plays the RX buffer (frame information plus words), the
// driver (free buffer addresses), host memory (write port with random ready)
// and the RX queue bank (push with random ready). For every frame it checks
// that the words are written in order from the free buffer's start address,
// followed by one word holding {seconds[33:0], nanoseconds}, that the pointer
// pushed carries the buffer address and the frame length, that queues are
// chosen 0,1,2,3,0,... and that exactly one interrupt pulse follows each
// push on the chosen queue. With memory and queues always ready a frame of W
// words must take W+3 clocks: W+2 from taking the frame to the push and one
// more to return to idle.
module tb_rx_engine;
  import tas_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        info_valid, info_ready, rd_en, free_valid, free_ready;
  logic [15:0] info_len, info_words;
  logic [47:0] info_ts_sec;
  logic [29:0] info_ts_ns;
  logic [63:0] rd_data, wr_data;
  logic [31:0] free_addr, wr_addr;
  logic        wr_valid, wr_ready, rxq_push_valid, rxq_push_ready;
  logic [7:0]  wr_strb;
  logic [1:0]  rxq_push_q;
  desc_t       rxq_push_desc;
  logic [3:0]  irq;

  rx_engine #(.NUM_RXQ(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  // frame source
  typedef struct { int len; int words; logic [47:0] sec; logic [29:0] ns; logic [63:0] w[$]; } fr_t;
  fr_t src[$];
  fr_t pend[$];          // frames handed over, waiting for their writes
  logic [31:0] frees[$];
  int word_idx = 0;

  always_comb begin
    info_valid = src.size() != 0;
    info_len = info_valid ? 16'(src[0].len) : '0;
    info_words = info_valid ? 16'(src[0].words) : '0;
    info_ts_sec = info_valid ? src[0].sec : '0;
    info_ts_ns = info_valid ? src[0].ns : '0;
  end
  assign rd_data = (pend.size() != 0 && word_idx < pend[0].words) ? pend[0].w[word_idx] : 64'hDEAD;

  bit fast = 0;
  always @(negedge clk) begin
    wr_ready = fast ? 1'b1 : ($urandom % 3) != 0;
    rxq_push_ready = fast ? 1'b1 : ($urandom % 2) != 0;
  end

  int exp_q = 0, frames = 0, irqs = 0;
  bit irq_exp_v = 0;
  int irq_exp_q = 0;
  logic [31:0] cur_base;
  longint cyc = 0, take_cyc;
  always @(posedge clk) cyc++;

  always @(posedge clk) begin
    if (!rst) begin
      if (info_valid && info_ready) begin
        pend.push_back(src.pop_front());
        cur_base = frees.pop_front();
        word_idx = 0;
        take_cyc = cyc;
      end else if (wr_valid && wr_ready) begin
        check(pend.size() != 0, "write with a frame");
        if (pend.size() != 0) begin
          check(wr_addr == cur_base + 32'(8 * word_idx), "write address");
          check(wr_strb == 8'hFF, "strobe");
          if (word_idx < pend[0].words) begin
            check(rd_en, "rd_en with data write");
            check(wr_data == pend[0].w[word_idx], "write data");
          end else
            check(wr_data == {pend[0].sec[33:0], pend[0].ns}, "timestamp word");
          word_idx++;
        end
      end
      if (rxq_push_valid && rxq_push_ready) begin
        check(pend.size() != 0 && word_idx == pend[0].words + 1, "push after all writes");
        check(rxq_push_q == 2'(exp_q), "queue round-robin");
        check(rxq_push_desc.addr == cur_base && rxq_push_desc.len == 16'(pend[0].len), "pointer");
        if (fast) check(cyc - take_cyc == pend[0].words + 2, $sformatf("latency %0d", cyc - take_cyc));
        exp_q = (exp_q + 1) % 4;
        void'(pend.pop_front());
        frames++;
      end
      // exactly one interrupt, on the queue just used, one clock after a push
      check(irq == (irq_exp_v ? 4'(1 << irq_exp_q) : 4'b0), "interrupt pulse");
      if (irq != 0) irqs++;
      irq_exp_v = rxq_push_valid && rxq_push_ready;
      irq_exp_q = rxq_push_q;
    end
  end

  task automatic add_frame();
    fr_t f;
    f.len = 1 + $urandom % 150;
    f.words = (f.len + 4 + 7) / 8;
    f.sec = {$urandom, $urandom};
    f.ns = 30'($urandom);
    for (int i = 0; i < f.words; i++) f.w.push_back({$urandom, $urandom});
    src.push_back(f);
  endtask

  task automatic give_free(input logic [31:0] a);
    @(negedge clk);
    free_valid = 1; free_addr = a;
    @(posedge clk iff free_ready);
    frees.push_back(a);
    @(negedge clk);
    free_valid = 0;
  endtask

  initial begin
    free_valid = 0; free_addr = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 30; n++) begin
      add_frame();
      give_free(32'h4000_0000 + 32'(n * 256));
    end
    wait (frames == 30);
    fast = 1;
    for (int n = 0; n < 8; n++) begin
      give_free(32'h5000_0000 + 32'(n * 256));
    end
    for (int n = 0; n < 8; n++) add_frame();
    wait (frames == 38);
    repeat (5) @(posedge clk);
    check(irqs == 38, "interrupts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
