// signature_unit_tb: feeds drawcalls (a constants block, then primitives with
// their overlapped tiles) into the Signature Unit, with a small 4-entry OT
// queue so that overflows happen, and compares every tile signature left in a
// Signature Buffer model with the bit-serial reference CRC of the tile's
// input message: per drawcall, its constants once, then the attributes of each
// of its primitives that overlap the tile.
// Part 1 is the four-tile example of the paper (drawcall F: primitive C on
// tiles 0 and 2; drawcall S: primitive A on tiles 1, 2, 3 and B on 1, 3);
// part 2 is random drawcalls over 16 tiles across several frames, one of
// them with its constants split into two consecutive blocks, which must be
// signed as one set.
module signature_unit_tb;
  import re_pkg::*;
  import re_tb_pkg::*;

  localparam int N = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic frame_start = 0;
  logic cp_valid = 0, plb_valid = 0, ot_valid = 0, ot_last = 0;
  logic cp_ready, plb_ready, ot_ready;
  subblock_t cp_data = '0, plb_data = '0;
  logic [3:0] ot_tile = '0;
  logic [3:0] sb_rd_addr, sb_wr_addr;
  logic [31:0] sb_rd_data, sb_wr_data;
  logic sb_wr_en, idle, ot_full;

  logic [31:0] sb_mem [N];
  logic [31:0] ref_sig [N];
  bit          touched [N];
  logic [63:0] cur_consts [$];
  bit          prims_since = 1;
  int n_overflow = 0, n_overlap = 0, n_const_once = 0, n_const_cat = 0;

  signature_unit #(.NUM_TILES(N), .OTQ_DEPTH(4)) dut (
    .clk, .rst_n, .frame_start,
    .cp_valid, .cp_ready, .cp_data, .plb_valid, .plb_ready, .plb_data,
    .ot_valid, .ot_ready, .ot_tile, .ot_last,
    .sb_rd_addr, .sb_rd_data, .sb_wr_en, .sb_wr_addr, .sb_wr_data, .idle, .ot_full);

  always #5 clk = ~clk;

  // Signature Buffer model: synchronous read, write-first not needed.
  always_ff @(posedge clk) begin
    sb_rd_data <= sb_mem[sb_rd_addr];
    if (sb_wr_en) sb_mem[sb_wr_addr] <= sb_wr_data;
  end

  always @(posedge clk) begin
    if (ot_valid && !ot_ready) n_overflow++;
    if (plb_valid && plb_ready && dut.tstate != 3'd0) n_overlap++;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%08h exp=%08h", what, got, exp);
    end
  endtask

  task automatic new_frame();
    wait (idle);
    @(negedge clk) frame_start = 1;
    @(negedge clk) frame_start = 0;
    foreach (sb_mem[i]) sb_mem[i] = '0;     // new bank reads as zero
    foreach (ref_sig[i]) begin ref_sig[i] = '0; touched[i] = 0; end
  endtask

  task automatic send_constants(int n);
    wait (idle);          // previous drawcall fully handed over
    // Constants right after constants extend the set; otherwise a new set.
    if (prims_since) begin
      cur_consts.delete();
      foreach (touched[i]) touched[i] = 0;
    end else n_const_cat++;
    prims_since = 0;
    for (int i = 0; i < n; i++) begin
      logic [63:0] w = rand64();
      cur_consts.push_back(w);
      @(negedge clk) cp_valid = 1; cp_data = '{data: w, last: (i == n - 1)};
      @(posedge clk) while (!cp_ready) @(posedge clk);
    end
    @(negedge clk) cp_valid = 0;
  endtask

  task automatic send_primitive(int n, int tiles [$]);
    logic [63:0] attrs [$];
    prims_since = 1;
    for (int i = 0; i < n; i++) attrs.push_back(rand64());
    // Reference update.
    foreach (tiles[k]) begin
      int t = tiles[k];
      if (!touched[t]) begin
        foreach (cur_consts[i]) ref_sig[t] = ref_crc_word(ref_sig[t], cur_consts[i]);
        touched[t] = 1;
      end else n_const_once++;
      foreach (attrs[i]) ref_sig[t] = ref_crc_word(ref_sig[t], attrs[i]);
    end
    fork
      begin
        foreach (attrs[i]) begin
          @(negedge clk) plb_valid = 1; plb_data = '{data: attrs[i], last: (i == n - 1)};
          @(posedge clk) while (!plb_ready) @(posedge clk);
        end
        @(negedge clk) plb_valid = 0;
      end
      begin
        foreach (tiles[k]) begin
          @(negedge clk) ot_valid = 1; ot_tile = 4'(tiles[k]); ot_last = (k == tiles.size() - 1);
          @(posedge clk) while (!ot_ready) @(posedge clk);
        end
        @(negedge clk) ot_valid = 0;
      end
    join
  endtask

  task automatic compare_all(string what);
    wait (idle);
    @(negedge clk);
    @(negedge clk);
    for (int t = 0; t < N; t++) check($sformatf("%s tile %0d", what, t), sb_mem[t], ref_sig[t]);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] fig_sig [4];
    foreach (sb_mem[i]) sb_mem[i] = '0;
    foreach (ref_sig[i]) begin ref_sig[i] = '0; touched[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- Part 1: the four-tile example.
    new_frame();
    send_constants(8);                 // Constants F
    send_primitive(18, '{0, 2});       // Primitive C
    send_constants(8);                 // Constants S
    send_primitive(18, '{1, 2, 3});    // Primitive A
    send_primitive(18, '{1, 3});       // Primitive B
    compare_all("example");
    // Tiles 1 and 3 hold the same message (Constants S, A, B).
    check("tile1 == tile3", sb_mem[1], sb_mem[3]);
    check("tile0 != tile2", 32'(sb_mem[0] != sb_mem[2]), 1);

    // ---- Part 2: random drawcalls over several frames.
    for (int f = 0; f < 4; f++) begin
      new_frame();
      for (int d = 0; d < 5; d++) begin
        send_constants($urandom_range(1, 10));
        if (d == 2) send_constants($urandom_range(1, 10));   // a set in two blocks
        for (int p = 0; p < 6; p++) begin
          automatic int tiles [$];
          automatic int first = $urandom_range(0, N - 1);
          automatic int cnt = ($urandom_range(0, 4) == 0) ? $urandom_range(6, N) : $urandom_range(1, 3);
          for (int k = 0; k < cnt; k++) tiles.push_back((first + k) % N);
          send_primitive($urandom_range(1, 20), tiles);
        end
      end
      compare_all($sformatf("frame %0d", f));
    end

    // Mechanisms that must have occurred.
    check("OT queue overflow stalled the producer", 32'(n_overflow > 0), 1);
    check("next primitive signed during tile updates", 32'(n_overlap > 0), 1);
    check("constants folded once per tile", 32'(n_const_once > 0), 1);
    check("constants set built from two blocks", 32'(n_const_cat > 0), 1);
    $display("overflow stall cycles=%0d overlapped subblocks=%0d constants-skipped=%0d",
             n_overflow, n_overlap, n_const_once);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
