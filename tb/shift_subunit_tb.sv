// shift_subunit_tb: for random and single-bit 32-bit inputs c, the output must
// equal the reference CRC of the 64-bit message {c, 32 zero bits}, and must
// also equal the reference shift register started at c and run over 8 zero
// bytes (the CRC of any message whose CRC is c, extended by 64 zero bits).
module shift_subunit_tb;
  import re_tb_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] c, crc;

  shift_subunit dut (.prev_crc(c), .crc);

  task automatic check_one(logic [31:0] v);
    logic [31:0] exp;
    c = v; #1;
    exp = ref_crc_word(32'h0, {v, 32'h0});
    checks++;
    if (ref_crc_zeros(v, 8) !== exp) begin
      failures++;
      $display("FAIL reference identity c=%08h", v);
    end
    checks++;
    if (crc !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL c=%08h got=%08h exp=%08h", v, crc, exp);
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
    check_one(32'h0);
    for (int i = 0; i < 32; i++) check_one(32'h1 << i);
    for (int i = 0; i < 2000; i++) check_one($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
