// sign_subunit_tb: the CRC of random and corner-case 64-bit subblocks must
// equal the bit-serial reference CRC of the 8 bytes, bits 63:56 first.
module sign_subunit_tb;
  import re_tb_pkg::*;

  int checks = 0, failures = 0;
  logic [63:0] sb;
  logic [31:0] crc;

  sign_subunit dut (.subblock(sb), .crc);

  task automatic check_one(logic [63:0] v);
    logic [31:0] exp;
    sb = v; #1;
    exp = ref_crc_word(32'h0, v);
    checks++;
    if (crc !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL sb=%016h got=%08h exp=%08h", v, crc, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_one(64'h0);
    check_one('1);
    for (int i = 0; i < 64; i++) check_one(64'h1 << i);   // every bit position
    for (int i = 0; i < 2000; i++) check_one(rand64());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
