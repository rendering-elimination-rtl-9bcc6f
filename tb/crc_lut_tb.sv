// crc_lut_tb: checks every entry of three CRC tables (0, 5 and 11 trailing
// zero bytes) against the bit-serial reference CRC of the byte followed by
// that many zero bytes.
module crc_lut_tb;
  import re_tb_pkg::*;

  int checks = 0, failures = 0;
  logic [7:0]  addr;
  logic [31:0] d0, d5, d11;

  crc_lut #(.ZERO_BYTES(0))  u0  (.addr, .data(d0));
  crc_lut #(.ZERO_BYTES(5))  u5  (.addr, .data(d5));
  crc_lut #(.ZERO_BYTES(11)) u11 (.addr, .data(d11));

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s addr=%0h got=%08h exp=%08h", what, addr, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Known values: a lone 0x01 byte gives the polynomial itself.
    addr = 8'h01; #1;
    check("lut0[01]=poly", d0, 32'h04C1_1DB7);
    addr = 8'h00; #1;
    check("lut11[00]=0", d11, 32'h0);
    for (int b = 0; b < 256; b++) begin
      addr = 8'(b); #1;
      check("lut0",  d0,  ref_crc_byte(32'h0, addr));
      check("lut5",  d5,  ref_crc_zeros(ref_crc_byte(32'h0, addr), 5));
      check("lut11", d11, ref_crc_zeros(ref_crc_byte(32'h0, addr), 11));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
