// rendering_elimination_tb: end-to-end test of the Rendering Elimination
// hardware at its default size (1196x768 screen, 3600 tiles of 16x16 pixels).
//
// A synthetic scene of drawcalls is replayed over five frames, standing in for
// the Command Processor and the Polygon List Builder. Each primitive covers a
// rectangle of tiles; one covers 40 tiles and overflows the 16-entry OT queue.
//   frame 0: first frame after reset       -> every tile rendered
//   frame 1: same scene                    -> every tile eliminated
//   frame 2: one primitive and one drawcall's constants changed
//                                          -> only the tiles they touch rendered
//   frame 3: same as frame 2, RE disabled  -> every tile rendered
//   frame 4: same as frame 3               -> every tile eliminated
// For every tile the decision is checked against a reference that builds the
// tile's input message (constants once per drawcall, then the attributes of
// each overlapping primitive) and compares bit-serial CRCs of consecutive
// frames. The Raster Pipeline side accepts dispatched tiles at random.
module rendering_elimination_tb;
  import re_pkg::*;
  import re_tb_pkg::*;

  localparam int N  = SCREEN_TILES;
  localparam int TX = TILES_X;
  localparam int TY = TILES_Y;
  localparam int ND = 6;      // drawcalls per frame
  localparam int NP = 8;      // primitives per drawcall

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic frame_start = 0, geom_done = 0, re_enable = 1, frame_done;
  logic cp_valid = 0, plb_valid = 0, ot_valid = 0, ot_last = 0;
  logic cp_ready, plb_ready, ot_ready;
  subblock_t cp_data = '0, plb_data = '0;
  logic [11:0] ot_tile = '0;
  logic disp_valid, disp_ready = 0, skip_valid, ot_full;
  logic [11:0] disp_tile, skip_tile;

  rendering_elimination dut (
    .clk, .rst_n, .frame_start, .geom_done, .re_enable, .frame_done,
    .cp_valid, .cp_ready, .cp_data, .plb_valid, .plb_ready, .plb_data,
    .ot_valid, .ot_ready, .ot_tile, .ot_last,
    .disp_valid, .disp_ready, .disp_tile, .skip_valid, .skip_tile, .ot_full);

  always #5 clk = ~clk;

  // Scene state and reference.
  int          prim_ver [ND][NP];
  int          const_ver [ND];
  logic [31:0] ref_cur [N], ref_prev [N];
  bit          touched [N];
  int          decision [N];    // 0 none, 1 rendered, 2 eliminated
  int          next_tile;
  // Mechanism counters.
  int n_skip = 0, n_disp = 0, n_overflow = 0, n_overlap = 0, n_const_once = 0;
  int n_disabled_frames = 0, n_first_frame = 0, n_const_cat = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  function automatic logic [63:0] mix(int a, int b, int c, int d);
    logic [63:0] x = {32'(a * 7919 + b * 104729), 32'(c * 1299709 + d * 15485863)} ^ 64'h9E37_79B9_7F4A_7C15;
    for (int r = 0; r < 3; r++) begin
      x ^= x >> 31; x *= 64'hBF58_476D_1CE4_E5B9; x ^= x >> 27;
    end
    return x;
  endfunction

  // Tile rectangle of primitive (d, p): mostly 1..3 x 1..2 tiles, placed near
  // a per-drawcall anchor so that primitives of a drawcall share tiles.
  task automatic prim_rect(int d, int p, output int x0, output int y0, output int w, output int h);
    logic [63:0] r = mix(d, p, 99, 0);
    logic [63:0] a = mix(d, 0, 98, 0);
    if (d == 1 && p == 2) begin w = 10; h = 4; end    // 40 tiles: overflows the OT queue
    else begin w = 1 + int'(r[3:0] % 3); h = 1 + int'(r[7:4] % 2); end
    x0 = int'(a[15:0] % (TX - 16)) + int'(r[23:8] % 4);
    y0 = int'(a[31:16] % (TY - 8)) + int'(r[39:24] % 3);
  endtask

  // Raster Pipeline side and decision recording.
  always @(posedge clk) begin
    disp_ready <= ($urandom_range(0, 3) != 0);
    if (disp_valid && disp_ready) begin
      check("dispatch order", int'(disp_tile), next_tile);
      decision[disp_tile] = 1;
      next_tile++;
      n_disp++;
    end
    if (skip_valid) begin
      check("skip order", int'(skip_tile), next_tile);
      decision[skip_tile] = 2;
      next_tile++;
      n_skip++;
    end
    if (ot_valid && !ot_ready) n_overflow++;
    if (plb_valid && plb_ready && dut.u_su.tstate != 3'd0) n_overlap++;
  end

  // Drawcall d has 2 + d constant subblocks; drawcall 3 sends them as two
  // consecutive blocks, which must be signed as one set.
  function automatic int n_const(int d);
    return 2 + d;
  endfunction

  task automatic send_constants(int d);
    int n = n_const(d);
    wait (dut.u_su.idle);
    foreach (touched[i]) touched[i] = 0;
    for (int i = 0; i < n; i++) begin
      bit last = (i == n - 1) || (d == 3 && i == 1);
      @(negedge clk) cp_valid = 1; cp_data = '{data: mix(d, const_ver[d], i, 7), last: last};
      @(posedge clk) while (!cp_ready) @(posedge clk);
      if (last && i != n - 1) begin
        @(negedge clk) cp_valid = 0;
        wait (dut.u_su.idle);
        n_const_cat++;
      end
    end
    @(negedge clk) cp_valid = 0;
  endtask

  task automatic send_primitive(int d, int p);
    int x0, y0, w, h;
    int n = 6 + (p % 13);
    int tiles [$];
    prim_rect(d, p, x0, y0, w, h);
    for (int y = y0; y < y0 + h; y++)
      for (int x = x0; x < x0 + w; x++) tiles.push_back(y * TX + x);
    // Reference: constants once per drawcall and tile, then the attributes.
    foreach (tiles[k]) begin
      int t = tiles[k];
      if (!touched[t]) begin
        for (int i = 0; i < n_const(d); i++) ref_cur[t] = ref_crc_word(ref_cur[t], mix(d, const_ver[d], i, 7));
        touched[t] = 1;
      end else n_const_once++;
      for (int i = 0; i < n; i++) ref_cur[t] = ref_crc_word(ref_cur[t], mix(d, p, i, prim_ver[d][p]));
    end
    fork
      begin
        for (int i = 0; i < n; i++) begin
          @(negedge clk) plb_valid = 1; plb_data = '{data: mix(d, p, i, prim_ver[d][p]), last: (i == n - 1)};
          @(posedge clk) while (!plb_ready) @(posedge clk);
        end
        @(negedge clk) plb_valid = 0;
      end
      begin
        foreach (tiles[k]) begin
          @(negedge clk) ot_valid = 1; ot_tile = 12'(tiles[k]); ot_last = (k == tiles.size() - 1);
          @(posedge clk) while (!ot_ready) @(posedge clk);
        end
        @(negedge clk) ot_valid = 0;
      end
    join
  endtask

  task automatic run_frame(int f, bit en);
    int exp_render = 0, cycles = 0;
    ref_prev = ref_cur;
    foreach (ref_cur[i]) begin ref_cur[i] = '0; touched[i] = 0; decision[i] = 0; end
    next_tile = 0;
    @(negedge clk) frame_start = 1;
    @(negedge clk) frame_start = 0;
    for (int d = 0; d < ND; d++) begin
      send_constants(d);
      for (int p = 0; p < NP; p++) send_primitive(d, p);
    end
    @(negedge clk) geom_done = 1; re_enable = en;
    @(negedge clk) geom_done = 0;
    while (!frame_done && cycles < 200000) begin
      @(negedge clk);
      cycles++;
    end
    check($sformatf("frame %0d completes", f), int'(frame_done), 1);
    for (int t = 0; t < N; t++) begin
      bit elim = en && (f > 0) && (ref_cur[t] == ref_prev[t]);
      if (!elim) exp_render++;
      check($sformatf("frame %0d tile %0d decision", f, t), decision[t], elim ? 2 : 1);
    end
    $display("frame %0d: %0d tiles rendered (expected %0d), tile walk took %0d cycles",
             f, N - count_elim(), exp_render, cycles);
    if (!en) n_disabled_frames++;
    if (f == 0 && exp_render == N) n_first_frame++;
  endtask

  function automatic int count_elim();
    int c = 0;
    foreach (decision[t]) if (decision[t] == 2) c++;
    return c;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (prim_ver[d, p]) prim_ver[d][p] = 0;
    foreach (const_ver[d]) const_ver[d] = 0;
    foreach (ref_cur[i]) ref_cur[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(0, 1);
    check("frame 0: everything rendered", count_elim(), 0);
    run_frame(1, 1);
    check("frame 1: everything eliminated", count_elim(), N);
    prim_ver[2][3] = 1;
    const_ver[4]   = 1;
    run_frame(2, 1);
    check("frame 2: some tiles rendered", int'(count_elim() < N), 1);
    check("frame 2: most tiles eliminated", int'(count_elim() > N / 2), 1);
    run_frame(3, 0);
    check("frame 3 (RE off): everything rendered", count_elim(), 0);
    run_frame(4, 1);
    check("frame 4: everything eliminated", count_elim(), N);

    // Every mechanism must have been exercised.
    check("tiles eliminated", int'(n_skip > 0), 1);
    check("tiles dispatched", int'(n_disp > 0), 1);
    check("OT queue overflow stall", int'(n_overflow > 0), 1);
    check("primitive signed while tiles updated", int'(n_overlap > 0), 1);
    check("constants folded once per tile", int'(n_const_once > 0), 1);
    check("RE disabled frame", int'(n_disabled_frames > 0), 1);
    check("constants set sent as two blocks", int'(n_const_cat > 0), 1);
    check("first frame fully rendered", int'(n_first_frame > 0), 1);
    $display("eliminated=%0d dispatched=%0d overflow-stall cycles=%0d overlapped subblocks=%0d constants-skipped=%0d disabled frames=%0d",
             n_skip, n_disp, n_overflow, n_overlap, n_const_once, n_disabled_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
