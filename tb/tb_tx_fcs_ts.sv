// tb_tx_fcs_ts: outgoing frames must gain a correct FCS and one timestamp.
//
// Random frames of 1..100 bytes are streamed in with random valid gaps while
// the output is randomly held off. The output bytes are collected per frame
// and compared with the input bytes followed by the CRC-32 the testbench
// computes itself (bit-serial, reflected 0xEDB88320). Every length modulo 8
// is covered, so the FCS both fits in the last beat and spills into an extra
// beat. The time input counts clocks; each frame must report exactly one
// timestamp equal to the time its first beat was taken by the output.
module tb_tx_fcs_ts;
  import tas_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [63:0] s_axis_tdata, m_axis_tdata;
  logic [7:0]  s_axis_tkeep, m_axis_tkeep;
  logic        s_axis_tlast, s_axis_tvalid, s_axis_tready;
  logic        m_axis_tlast, m_axis_tvalid, m_axis_tready;
  logic [47:0] tod_sec, ts_sec;
  logic [29:0] tod_ns, ts_ns;
  logic        ts_valid;

  tx_fcs_ts dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  function automatic logic [31:0] ref_crc(input byte unsigned b[$]);
    logic [31:0] c;
    c = '1;
    foreach (b[i]) begin
      for (int k = 0; k < 8; k++) begin
        logic fb;
        fb = c[0] ^ b[i][k];
        c = c >> 1;
        if (fb) c = c ^ 32'hEDB88320;
      end
    end
    return ~c;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin tod_ns <= 0; tod_sec <= 48'd7; end
    else tod_ns <= tod_ns + 1;
  end

  byte unsigned exp_frames[$][$];
  byte unsigned cur_out[$];
  logic [29:0] exp_ts[$];
  bit first_out = 1;
  int frames_done = 0, extra_beats = 0, ts_seen = 0;

  always @(negedge clk) m_axis_tready = ($urandom % 4) != 0;

  always @(posedge clk) begin
    if (!rst && m_axis_tvalid && m_axis_tready) begin
      if (first_out) exp_ts.push_back(tod_ns);
      first_out = m_axis_tlast;
      for (int i = 0; i < 8; i++) if (m_axis_tkeep[i]) cur_out.push_back(m_axis_tdata[8*i +: 8]);
      if (m_axis_tlast) begin
        if (m_axis_tkeep[7:4] == 4'b0 && cur_out.size() % 8 != 0 && cur_out.size() % 8 <= 4 && cur_out.size() > 8) extra_beats++;
        check(exp_frames.size() != 0, "frame expected");
        if (exp_frames.size() != 0) begin
          byte unsigned e[$];
          e = exp_frames.pop_front();
          check(cur_out.size() == e.size(), $sformatf("length %0d exp %0d", cur_out.size(), e.size()));
          check(cur_out == e, "frame bytes and FCS");
        end
        cur_out.delete();
        frames_done++;
      end
    end
    if (!rst && ts_valid) begin
      ts_seen++;
      check(exp_ts.size() != 0 && ts_ns == exp_ts[0] && ts_sec == 48'd7, "timestamp");
      if (exp_ts.size() != 0) void'(exp_ts.pop_front());
    end
  end

  task automatic send(input int len);
    byte unsigned b[$];
    logic [31:0] f;
    for (int i = 0; i < len; i++) b.push_back(8'($urandom));
    f = ref_crc(b);
    begin
      byte unsigned e[$];
      e = b;
      for (int i = 0; i < 4; i++) e.push_back(f[8*i +: 8]);
      exp_frames.push_back(e);
    end
    for (int w = 0; w < (len + 7) / 8; w++) begin
      @(negedge clk);
      while ($urandom % 5 == 0) begin s_axis_tvalid = 0; @(negedge clk); end
      s_axis_tvalid = 1;
      s_axis_tdata = {$urandom, $urandom};
      s_axis_tkeep = 0;
      for (int i = 0; i < 8; i++)
        if (8 * w + i < len) begin s_axis_tdata[8*i +: 8] = b[8*w + i]; s_axis_tkeep[i] = 1; end
      s_axis_tlast = (w == (len + 7) / 8 - 1);
      @(posedge clk iff s_axis_tready);
    end
    @(negedge clk);
    s_axis_tvalid = 0;
  endtask

  initial begin
    s_axis_tvalid = 0; s_axis_tdata = 0; s_axis_tkeep = 0; s_axis_tlast = 0; m_axis_tready = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 120; n++) send(1 + (n % 100));
    repeat (50) @(posedge clk);
    check(frames_done == 120, $sformatf("frames %0d", frames_done));
    check(ts_seen == 120, $sformatf("timestamps %0d", ts_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
