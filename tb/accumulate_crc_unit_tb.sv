// accumulate_crc_unit_tb: for a random initial CRC and shift amounts 0..40,
// the result must be the reference shift register started at the initial CRC
// and run over 8*n zero bytes (the CRC of the tile's message extended by n
// zero subblocks), and `done` must rise exactly n+1 cycles after `start`.
module accumulate_crc_unit_tb;
  import re_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [31:0] init_crc = '0;
  logic [15:0] shift_amount = '0;
  logic busy, done;
  logic [31:0] crc_accum;

  accumulate_crc_unit dut (.clk, .rst_n, .start, .init_crc, .shift_amount, .busy, .done, .crc_accum);

  always #5 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%08h exp=%08h", what, got, exp);
    end
  endtask

  task automatic run(int n);
    logic [31:0] v = $urandom;
    int cycles = 0;
    @(negedge clk);
    start = 1; init_crc = v; shift_amount = 16'(n);
    @(negedge clk);
    start = 0; init_crc = $urandom;   // input must not matter after start
    cycles = 1;
    while (!done && cycles < 1000) begin
      @(negedge clk);
      cycles++;
    end
    check($sformatf("latency n=%0d", n), 32'(cycles), 32'(n + 1));
    check($sformatf("crc n=%0d", n), crc_accum, ref_crc_zeros(v, 8 * n));
    @(negedge clk);
    check("done is a pulse", 32'(done), 32'(0));
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
    run(0);
    run(1);
    run(8);
    run(18);
    for (int k = 0; k < 30; k++) run($urandom_range(0, 40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
