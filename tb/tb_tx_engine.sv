// tb_tx_engine: frames copied from a memory model must come out byte-exact.
//
// The testbench plays scheduler, queue bank and memory. It offers grants for
// random queues, answers the pop with a random frame pointer (8-byte aligned
// address, length 1..200 bytes), and serves read requests in order after a
// latency of 1..4 clocks. Memory words are a fixed function of their address,
// so the expected stream is computed independently. Output ready is random.
// Checked: the popped queue equals the granted one, grant_ready is low while
// a frame is in progress, every beat's data and keep, tlast on the right
// beat. With memory latency 2 and the output always ready, a frame of W
// words must leave within W + 6 clocks of its grant (full line rate).
module tb_tx_engine;
  import tas_pkg::*;

  localparam int QW = 5;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic              grant_valid, grant_ready, pop_en;
  logic [QW-1:0]     grant_queue, pop_q, cur_queue;
  desc_t             pop_desc;
  logic              rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [ADDR_W-1:0] rd_req_addr;
  logic [DATA_W-1:0] rd_rsp_data;
  logic [DATA_W-1:0] m_axis_tdata;
  logic [KEEP_W-1:0] m_axis_tkeep;
  logic              m_axis_tlast, m_axis_tvalid, m_axis_tready, busy;

  tx_engine dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  function automatic logic [63:0] mem_word(logic [31:0] a);
    return {a ^ 32'hA5A5_5A5A, a * 32'd2654435761};
  endfunction

  // memory model: in-order responses
  longint cyc = 0;
  always @(posedge clk) cyc++;
  longint rsp_time[$];
  logic [63:0] rsp_data[$];
  bit fixed_lat = 0, always_ready = 0;
  longint last_t = 0;
  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready) begin
      longint t;
      t = cyc + (fixed_lat ? 2 : 1 + $urandom % 4);
      if (t <= last_t) t = last_t + 1;
      last_t = t;
      rsp_time.push_back(t);
      rsp_data.push_back(mem_word(rd_req_addr));
    end
  end
  always @(negedge clk) begin
    rd_req_ready = always_ready ? 1'b1 : ($urandom % 4) != 0;
    m_axis_tready = always_ready ? 1'b1 : ($urandom % 3) != 0;
    if (rsp_time.size() != 0 && rsp_time[0] <= cyc) begin
      rd_rsp_valid = 1;
      rd_rsp_data = rsp_data[0];
      void'(rsp_time.pop_front()); void'(rsp_data.pop_front());
    end else begin
      rd_rsp_valid = 0;
      rd_rsp_data = '0;
    end
  end

  // expected stream
  logic [63:0] exp_data[$];
  logic [7:0]  exp_keep[$];
  bit          exp_last[$];
  int frames_out = 0;
  longint grant_cyc, done_cyc;

  always @(posedge clk) begin
    if (!rst && m_axis_tvalid && m_axis_tready) begin
      if (exp_data.size() == 0) check(0, "unexpected beat");
      else begin
        logic [63:0] mask;
        for (int i = 0; i < 8; i++) mask[8*i +: 8] = {8{exp_keep[0][i]}};
        check((m_axis_tdata & mask) == (exp_data[0] & mask), $sformatf("data %016x exp %016x", m_axis_tdata, exp_data[0]));
        check(m_axis_tkeep == exp_keep[0], "keep");
        check(m_axis_tlast == exp_last[0], "last");
        if (m_axis_tlast) begin frames_out++; done_cyc = cyc; end
        void'(exp_data.pop_front()); void'(exp_keep.pop_front()); void'(exp_last.pop_front());
      end
    end
  end

  task automatic send_frame(input int q, input logic [31:0] addr, input int len);
    int w;
    @(negedge clk);
    grant_valid = 1; grant_queue = QW'(q);
    pop_desc = '{addr: addr, len: 16'(len)};
    while (!grant_ready) begin
      @(negedge clk);
    end
    #1;
    check(pop_en && pop_q == QW'(q), "pop follows grant");
    grant_cyc = cyc;
    w = (len + 7) / 8;
    for (int i = 0; i < w; i++) begin
      exp_data.push_back(mem_word(addr + 32'(8 * i)));
      exp_keep.push_back((i == w - 1 && len % 8 != 0) ? 8'((1 << (len % 8)) - 1) : 8'hFF);
      exp_last.push_back(i == w - 1);
    end
    @(negedge clk);
    grant_valid = 0;
    check(busy && !grant_ready, "busy after grant");
  endtask

  initial begin
    grant_valid = 0; grant_queue = 0; pop_desc = '0; rd_rsp_valid = 0; rd_rsp_data = 0;
    rd_req_ready = 0; m_axis_tready = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 60; n++)
      send_frame($urandom % 32, {$urandom, 3'b000} & 32'h00FF_FFF8, 1 + $urandom % 200);
    wait (exp_data.size() == 0);
    repeat (5) @(posedge clk);
    // line-rate check
    always_ready = 1; fixed_lat = 1;
    for (int n = 0; n < 10; n++) begin
      int len, w;
      len = 64 + 100 * n;
      w = (len + 7) / 8;
      send_frame(3, 32'h1000 * n, len);
      wait (exp_data.size() == 0);
      check(done_cyc - grant_cyc <= w + 6, $sformatf("frame of %0d words took %0d clocks", w, done_cyc - grant_cyc));
      @(posedge clk);
    end
    check(frames_out == 70, $sformatf("frames %0d", frames_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
