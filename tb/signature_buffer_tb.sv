// signature_buffer_tb: over several frames, random writes to the current bank
// and reads through both ports are checked against a two-bank model in which
// an entry not written in its frame reads as zero; checks bank swapping at
// frame_start and the previous-frame-valid flag (low for the first frame).
module signature_buffer_tb;
  localparam int N = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic frame_start = 0, su_wr_en = 0;
  logic [5:0] su_rd_addr = '0, su_wr_addr = '0, ts_rd_addr = '0;
  logic [31:0] su_wr_data = '0, su_rd_data, ts_cur_sig, ts_prev_sig;
  logic ts_prev_valid;
  logic [31:0] cur_m [N], prev_m [N];

  signature_buffer #(.NUM_TILES(N)) dut (.clk, .rst_n, .frame_start,
    .su_rd_addr, .su_rd_data, .su_wr_en, .su_wr_addr, .su_wr_data,
    .ts_rd_addr, .ts_cur_sig, .ts_prev_sig, .ts_prev_valid);

  always #5 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%08h exp=%08h", what, got, exp);
    end
  endtask

  task automatic new_frame();
    @(negedge clk) frame_start = 1;
    @(negedge clk) frame_start = 0;
    prev_m = cur_m;
    foreach (cur_m[i]) cur_m[i] = '0;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (cur_m[i]) begin cur_m[i] = '0; prev_m[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    new_frame();
    check("no previous frame yet", 32'(ts_prev_valid), 0);
    for (int f = 0; f < 6; f++) begin
      for (int i = 0; i < 400; i++) begin
        automatic logic [5:0] ra = 6'($urandom), ta = 6'($urandom);
        automatic logic [31:0] exp_su = cur_m[ra], exp_cur = cur_m[ta], exp_prev = prev_m[ta];
        su_rd_addr = ra; ts_rd_addr = ta;
        su_wr_en = ($urandom_range(0, 1) == 1);
        su_wr_addr = 6'($urandom); su_wr_data = $urandom;
        @(negedge clk);
        check("su read", su_rd_data, exp_su);
        check("ts cur", ts_cur_sig, exp_cur);
        check("ts prev", ts_prev_sig, exp_prev);
        if (su_wr_en) cur_m[su_wr_addr] = su_wr_data;
        su_wr_en = 0;
      end
      new_frame();
      check("previous frame valid", 32'(ts_prev_valid), 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
