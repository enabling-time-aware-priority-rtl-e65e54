// tb_tas_pkg: checks the shared CRC-32 helpers against published values.
//
// The Ethernet CRC-32 of the ASCII string "123456789" is 0xCBF43926 (the
// standard check value of this CRC). The test feeds that string as one full
// beat plus a one-byte beat, checks the result, then checks that running a
// message followed by its own FCS leaves the fixed residue 0xDEBB20E3, and
// that keep_bytes counts valid bytes of every contiguous keep mask.
module tb_tas_pkg;
  import tas_pkg::*;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    logic [31:0] c, fcs;
    logic [63:0] w;
    // "12345678" then "9"
    w = {8'h38, 8'h37, 8'h36, 8'h35, 8'h34, 8'h33, 8'h32, 8'h31};
    c = crc32_beat(32'hFFFF_FFFF, w, 8'hFF);
    c = crc32_beat(c, 64'h39, 8'h01);
    check(~c == 32'hCBF43926, $sformatf("check value %08x", ~c));
    // byte-at-a-time gives the same
    c = 32'hFFFF_FFFF;
    for (int i = 0; i < 9; i++) c = crc32_byte(c, 8'h31 + 8'(i));
    check(~c == 32'hCBF43926, "bytewise check value");
    // residue after message + FCS (least significant byte first)
    fcs = ~c;
    for (int i = 0; i < 4; i++) c = crc32_byte(c, fcs[8*i +: 8]);
    check(c == CRC_RESIDUE, $sformatf("residue %08x", c));
    // random messages: residue always holds
    for (int n = 0; n < 50; n++) begin
      int len;
      len = 1 + $urandom % 40;
      c = '1;
      for (int i = 0; i < len; i++) c = crc32_byte(c, 8'($urandom));
      fcs = ~c;
      for (int i = 0; i < 4; i++) c = crc32_byte(c, fcs[8*i +: 8]);
      check(c == CRC_RESIDUE, "random residue");
    end
    for (int k = 0; k <= 8; k++) check(keep_bytes(8'((1 << k) - 1)) == 4'(k), "keep_bytes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
