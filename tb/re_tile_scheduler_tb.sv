// re_tile_scheduler_tb: drives the scheduler with a 32-tile signature memory
// model. Each frame picks random current/previous signatures (about half
// equal) and checks that exactly the equal tiles are eliminated and the rest
// dispatched in order, that nothing is eliminated when RE is disabled or no
// previous frame exists, and that an eliminated tile costs 2 cycles.
module re_tile_scheduler_tb;
  localparam int N = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start = 0, re_enable = 0, sb_prev_valid = 0, disp_ready = 0;
  logic busy, done, disp_valid, skip_valid;
  logic [4:0] sb_rd_addr, disp_tile, skip_tile;
  logic [31:0] sb_cur_sig, sb_prev_sig;
  logic [31:0] cur_m [N], prev_m [N];
  int skipped [$], dispatched [$];

  re_tile_scheduler #(.NUM_TILES(N)) dut (.clk, .rst_n, .start, .re_enable, .busy, .done,
    .sb_rd_addr, .sb_cur_sig, .sb_prev_sig, .sb_prev_valid,
    .disp_valid, .disp_ready, .disp_tile, .skip_valid, .skip_tile);

  always #5 clk = ~clk;

  // Synchronous-read memory model.
  always_ff @(posedge clk) begin
    sb_cur_sig  <= cur_m[sb_rd_addr];
    sb_prev_sig <= prev_m[sb_rd_addr];
  end

  always @(posedge clk) begin
    if (skip_valid) skipped.push_back(int'(skip_tile));
    if (disp_valid && disp_ready) dispatched.push_back(int'(disp_tile));
    disp_ready <= ($urandom_range(0, 2) != 0);
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  task automatic frame(bit en, bit pv, int pct_equal);
    int cycles = 0;
    int exp_skip [$], exp_disp [$];
    for (int t = 0; t < N; t++) begin
      prev_m[t] = $urandom;
      cur_m[t]  = ($urandom_range(0, 99) < pct_equal) ? prev_m[t] : prev_m[t] ^ (32'h1 << $urandom_range(0, 31));
      if (en && pv && cur_m[t] == prev_m[t]) exp_skip.push_back(t);
      else exp_disp.push_back(t);
    end
    skipped.delete(); dispatched.delete();
    sb_prev_valid = pv;
    @(negedge clk) start = 1; re_enable = en;
    @(negedge clk) start = 0; re_enable = !en;   // sampled at start only
    while (!done && cycles < 10000) begin
      @(negedge clk);
      cycles++;
    end
    check("skipped count", skipped.size(), exp_skip.size());
    check("dispatched count", dispatched.size(), exp_disp.size());
    foreach (exp_skip[i]) if (i < skipped.size()) check("skipped tile", skipped[i], exp_skip[i]);
    foreach (exp_disp[i]) if (i < dispatched.size()) check("dispatched tile", dispatched[i], exp_disp[i]);
    if (exp_disp.size() == 0) check("2 cycles per eliminated tile", cycles, 2 * N);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    frame(1, 0, 100);    // first frame: nothing eliminated
    frame(1, 1, 100);    // all equal: all eliminated, timing check
    frame(0, 1, 100);    // RE disabled by the driver
    for (int k = 0; k < 20; k++) frame(1, 1, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
