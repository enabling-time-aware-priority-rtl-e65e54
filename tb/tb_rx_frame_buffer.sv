// tb_rx_frame_buffer: good frames pass, corrupted ones and overflows drop.
//
// Random frames of 8..120 bytes, each followed by its CRC-32 (computed here,
// bit-serial), arrive back to back or with gaps; about a third have one bit
// flipped. A consumer with a random pace pops frame information and reads the
// words. Checked: every delivered frame is byte-exact, carries its length
// without FCS and the time of its first beat, and arrives in order; every
// corrupted frame gives one drop_crc pulse and is never delivered; every good
// frame that is not delivered gave a drop_ovf pulse. A small buffer (64
// words) and a slow consumer in the second half force overflows.
module tb_rx_frame_buffer;
  import tas_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [63:0] s_axis_tdata, rd_data;
  logic [7:0]  s_axis_tkeep;
  logic        s_axis_tlast, s_axis_tvalid;
  logic [47:0] tod_sec, info_ts_sec;
  logic [29:0] tod_ns, info_ts_ns;
  logic        info_valid, info_ready, rd_en, drop_crc, drop_ovf;
  logic [15:0] info_len, info_words;

  rx_frame_buffer #(.BUF_WORDS(64), .INFO_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  function automatic logic [31:0] ref_crc(input byte unsigned b[$]);
    logic [31:0] c;
    c = '1;
    foreach (b[i]) for (int k = 0; k < 8; k++) begin
      logic fb;
      fb = c[0] ^ b[i][k];
      c = c >> 1;
      if (fb) c = c ^ 32'hEDB88320;
    end
    return ~c;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin tod_ns <= 0; tod_sec <= 48'd3; end
    else tod_ns <= tod_ns + 1;
  end

  typedef struct { byte unsigned b[$]; int ts; } frame_t;
  frame_t good[$];
  int n_bad = 0, n_good = 0, crc_drops = 0, ovf_drops = 0, delivered = 0, skipped = 0;
  bit slow = 0;

  always @(posedge clk) begin
    if (!rst && drop_crc) crc_drops++;
    if (!rst && drop_ovf) ovf_drops++;
  end

  // consumer
  initial begin
    info_ready = 0; rd_en = 0;
    forever begin
      @(negedge clk);
      if (info_valid && (slow ? ($urandom % 40) == 0 : 1'b1)) begin
        int len, words;
        byte unsigned got[$];
        logic [29:0] ts;
        len = info_len; words = info_words; ts = info_ts_ns;
        got.delete();
        check(info_ts_sec == 48'd3, "ts seconds");
        info_ready = 1;
        @(negedge clk);
        info_ready = 0;
        for (int w = 0; w < words; w++) begin
          for (int i = 0; i < 8; i++) got.push_back(rd_data[8*i +: 8]);
          rd_en = 1; @(negedge clk); rd_en = 0;
        end
        // match the next good frame, skipping ones lost to overflow
        while (good.size() != 0 && (good[0].b.size() != len || good[0].ts != ts)) begin
          void'(good.pop_front()); skipped++;
        end
        check(good.size() != 0, "delivered frame was sent");
        if (good.size() != 0) begin
          check(words == (len + 4 + 7) / 8, "word count");
          for (int i = 0; i < len; i++) check(got[i] == good[0].b[i], $sformatf("byte %0d of %0d got %02x exp %02x words %0d", i, len, got[i], good[0].b[i], words));
          void'(good.pop_front());
          delivered++;
        end
      end
    end
  end

  task automatic send(input int len, input bit corrupt);
    byte unsigned b[$], w[$];
    logic [31:0] f;
    frame_t fr;
    for (int i = 0; i < len; i++) b.push_back(8'($urandom));
    f = ref_crc(b);
    w = b;
    for (int i = 0; i < 4; i++) w.push_back(f[8*i +: 8]);
    if (corrupt) begin
      int p;
      p = $urandom % w.size();
      w[p] = w[p] ^ (8'd1 << ($urandom % 8));
    end
    for (int k = 0; k < (w.size() + 7) / 8; k++) begin
      @(negedge clk);
      if (k == 0) begin fr.ts = int'(tod_ns); end
      s_axis_tvalid = 1;
      s_axis_tkeep = 0;
      s_axis_tdata = 0;
      for (int i = 0; i < 8; i++)
        if (8 * k + i < w.size()) begin s_axis_tdata[8*i +: 8] = w[8*k + i]; s_axis_tkeep[i] = 1; end
      s_axis_tlast = (k == (w.size() + 7) / 8 - 1);
    end
    @(negedge clk);
    s_axis_tvalid = 0;
    fr.b = b;
    if (corrupt) n_bad++;
    else begin n_good++; good.push_back(fr); end
    repeat ($urandom % 4) @(negedge clk);
  endtask

  initial begin
    s_axis_tvalid = 0; s_axis_tlast = 0; s_axis_tkeep = 0; s_axis_tdata = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 150; n++) begin
      if (n == 75) slow = 1;
      send(8 + $urandom % 113, ($urandom % 3) == 0);
    end
    slow = 0;
    repeat (3000) @(posedge clk);
    skipped += good.size();
    // a corrupted frame that also meets a full buffer is counted as overflow
    check(crc_drops <= n_bad && crc_drops + ovf_drops == n_bad + skipped,
          $sformatf("crc drops %0d ovf drops %0d bad %0d skipped %0d", crc_drops, ovf_drops, n_bad, skipped));
    check(crc_drops > 0, "crc drop seen");
    check(delivered + skipped == n_good, "all good frames accounted");
    check(ovf_drops > 0 && delivered > 20, "coverage");
    $display("good=%0d bad=%0d delivered=%0d ovf=%0d", n_good, n_bad, delivered, ovf_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
