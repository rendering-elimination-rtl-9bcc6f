// compute_crc_unit_tb: signs blocks of 1..40 random 64-bit subblocks fed one
// per clock and compares CRC_Out with the bit-serial reference CRC of the
// whole block and the shift amount with the subblock count. It also checks
// the rate: the paper's average constants block (8 subblocks) and primitive
// (18 subblocks) must complete in 8 and 18 cycles.
module compute_crc_unit_tb;
  import re_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic clear = 0, in_valid = 0;
  logic [63:0] in_data = '0;
  logic [31:0] crc_out;
  logic [15:0] shift_amount;

  compute_crc_unit dut (.clk, .rst_n, .clear, .in_valid, .in_data, .crc_out, .shift_amount);

  always #5 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%08h exp=%08h", what, got, exp);
    end
  endtask

  task automatic sign_block(int n);
    logic [31:0] ref_crc = 32'h0;
    int cycles = 0;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    check("cleared", crc_out, 32'h0);
    for (int i = 0; i < n; i++) begin
      logic [63:0] w = rand64();
      in_valid = 1; in_data = w;
      ref_crc = ref_crc_word(ref_crc, w);
      @(negedge clk);
      cycles++;
    end
    in_valid = 0;
    check($sformatf("crc n=%0d", n), crc_out, ref_crc);
    check($sformatf("shamt n=%0d", n), 32'(shift_amount), 32'(n));
    check($sformatf("cycles n=%0d", n), 32'(cycles), 32'(n));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    sign_block(8);    // average constants block: 16 x 4-byte values
    sign_block(18);   // average primitive: 3 attributes x 48 bytes
    sign_block(1);
    for (int k = 0; k < 30; k++) sign_block(1 + $urandom_range(0, 39));
    // A held (non-valid) input must not change the state.
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0; in_data = rand64();
    repeat (3) @(negedge clk);
    check("idle keeps 0", crc_out, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
