// constant_bitmap_tb: random test-and-set and clear operations on a 3600-tile
// bitmap, checked against a bit-array model: `was_set` must show whether the
// tile was already marked since the last clear.
module constant_bitmap_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic clear = 0, test_set = 0;
  logic [11:0] tile = '0;
  logic was_set;
  bit model [3600];

  constant_bitmap dut (.clk, .rst_n, .clear, .tile, .test_set, .was_set);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      clear    = ($urandom_range(0, 499) == 0);
      test_set = !clear && ($urandom_range(0, 3) != 0);
      tile     = 12'($urandom_range(0, 63) + (($urandom_range(0, 9) == 0) ? $urandom_range(0, 3535) : 0));
      #1;
      checks++;
      if (was_set !== model[tile]) begin
        failures++;
        if (failures < 10) $display("FAIL tile=%0d got=%0b exp=%0b", tile, was_set, model[tile]);
      end
      if (was_set) hits++;
      @(negedge clk);
      if (clear) foreach (model[t]) model[t] = 0;
      else if (test_set) model[tile] = 1;
    end
    checks++;
    if (hits == 0) begin
      failures++;
      $display("FAIL no already-set tile was ever seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
