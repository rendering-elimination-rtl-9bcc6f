// re_workload_tb: frame sequences shaped like the three kinds of game the
// evaluation distinguishes, run on the Rendering Elimination hardware at its
// default size (1196x768 screen, 3600 tiles).
//
// The games themselves cannot be replayed here, so each frame is a small
// synthetic scene that reproduces what matters to RE: which tiles receive the
// same inputs as in the previous frame. A frame has two drawcalls:
//   drawcall 0, background: 30 quads of 15x8 tiles covering the whole screen;
//                its vertex attributes depend on the camera position;
//   drawcall 1, sprites:    4 quads of 2x2 tiles whose attributes depend on
//                their screen position; sprite 0 moves every frame.
// Three phases follow one another without a reset:
//   static camera (like the puzzle and strategy games): the camera stays put,
//     so only the tiles under the moving sprite change;
//   moving camera (like the first-person shooter): the camera moves every
//     frame, so every background attribute changes and nothing is eliminated;
//   mixed (like the games that alternate both): the camera moves on every
//     other frame.
// Every tile's decision is checked against a bit-serial CRC reference, and
// the share of eliminated tiles is checked per phase: above 90% for the
// static camera, none for the moving camera, in between for the mixed phase.
module re_workload_tb;
  import re_pkg::*;
  import re_tb_pkg::*;

  localparam int N  = SCREEN_TILES;
  localparam int TX = TILES_X;
  localparam int TY = TILES_Y;
  localparam int BG_W = 15, BG_H = 8;          // background quad, in tiles
  localparam int NBG  = (TX / BG_W) * (TY / BG_H);
  localparam int NSPR = 4;
  localparam int FRAMES_PER_PHASE = 4;

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

  logic [31:0] ref_cur [N], ref_prev [N];
  bit          touched [N];
  int          decision [N];    // 0 none, 1 rendered, 2 eliminated
  int          next_tile;
  int          n_frames = 0;

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

  always @(posedge clk) begin
    disp_ready <= ($urandom_range(0, 3) != 0);
    if (disp_valid && disp_ready) begin
      check("dispatch order", int'(disp_tile), next_tile);
      decision[disp_tile] = 1;
      next_tile++;
    end
    if (skip_valid) begin
      check("skip order", int'(skip_tile), next_tile);
      decision[skip_tile] = 2;
      next_tile++;
    end
  end

  // Constants of drawcall d: four subblocks, the same in every frame.
  localparam int NCONST = 4;

  task automatic send_constants(int d);
    wait (dut.u_su.idle);
    foreach (touched[i]) touched[i] = 0;
    for (int i = 0; i < NCONST; i++) begin
      @(negedge clk) cp_valid = 1; cp_data = '{data: mix(d, 0, i, 7), last: (i == NCONST - 1)};
      @(posedge clk) while (!cp_ready) @(posedge clk);
    end
    @(negedge clk) cp_valid = 0;
  endtask

  // One primitive of drawcall d with attribute seed s, covering the tile
  // rectangle (x0, y0, w, h); three attributes of 6 subblocks each.
  task automatic send_primitive(int d, int s, int x0, int y0, int w, int h);
    localparam int NSUB = 18;
    int tiles [$];
    for (int y = y0; y < y0 + h; y++)
      for (int x = x0; x < x0 + w; x++) tiles.push_back(y * TX + x);
    foreach (tiles[k]) begin
      int t = tiles[k];
      if (!touched[t]) begin
        for (int i = 0; i < NCONST; i++) ref_cur[t] = ref_crc_word(ref_cur[t], mix(d, 0, i, 7));
        touched[t] = 1;
      end
      for (int i = 0; i < NSUB; i++) ref_cur[t] = ref_crc_word(ref_cur[t], mix(d, s, i, 3));
    end
    fork
      begin
        for (int i = 0; i < NSUB; i++) begin
          @(negedge clk) plb_valid = 1; plb_data = '{data: mix(d, s, i, 3), last: (i == NSUB - 1)};
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

  // Renders one frame with the camera at `cam` and sprite 0 at step `step`;
  // returns the number of eliminated tiles.
  task automatic run_frame(string phase, int cam, int step, output int n_elim);
    int cycles = 0;
    ref_prev = ref_cur;
    foreach (ref_cur[i]) begin ref_cur[i] = '0; decision[i] = 0; end
    next_tile = 0;
    @(negedge clk) frame_start = 1;
    @(negedge clk) frame_start = 0;
    send_constants(0);
    for (int p = 0; p < NBG; p++)
      send_primitive(0, 1000 * cam + p, (p % (TX / BG_W)) * BG_W, (p / (TX / BG_W)) * BG_H, BG_W, BG_H);
    send_constants(1);
    for (int s = 0; s < NSPR; s++) begin
      int x = 6 + 17 * s + (s == 0 ? (3 * step) % 40 : 0);
      int y = 10 + 9 * s;
      send_primitive(1, 100000 + 256 * x + y, x, y, 2, 2);
    end
    @(negedge clk) geom_done = 1;
    @(negedge clk) geom_done = 0;
    while (!frame_done && cycles < 200000) begin
      @(negedge clk);
      cycles++;
    end
    check("frame completes", int'(frame_done), 1);
    n_elim = 0;
    for (int t = 0; t < N; t++) begin
      bit elim = (n_frames > 0) && (ref_cur[t] == ref_prev[t]);
      check("tile decision", decision[t], elim ? 2 : 1);
      if (decision[t] == 2) n_elim++;
    end
    $display("%s frame: camera %0d, %0d of %0d tiles eliminated (%0d%%), tile walk %0d cycles",
             phase, cam, n_elim, N, 100 * n_elim / N, cycles);
    n_frames++;
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cam = 0, step = 0, e, tot;
    foreach (ref_cur[i]) ref_cur[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame("warm-up", cam, step++, e);
    check("first frame fully rendered", e, 0);

    tot = 0;
    for (int f = 0; f < FRAMES_PER_PHASE; f++) begin
      run_frame("static-camera", cam, step++, e);
      check("static camera: sprite tiles rendered", int'(e < N), 1);
      tot += e;
    end
    check("static camera: over 90% eliminated", int'(tot * 10 > 9 * N * FRAMES_PER_PHASE), 1);

    tot = 0;
    for (int f = 0; f < FRAMES_PER_PHASE; f++) begin
      cam++;
      run_frame("moving-camera", cam, step++, e);
      tot += e;
    end
    check("moving camera: nothing eliminated", tot, 0);

    tot = 0;
    for (int f = 0; f < FRAMES_PER_PHASE; f++) begin
      if (f % 2 == 0) cam++;
      run_frame("mixed", cam, step++, e);
      tot += e;
    end
    check("mixed: some tiles eliminated", int'(tot > 0), 1);
    check("mixed: fewer than with a static camera", int'(tot * 10 < 9 * N * FRAMES_PER_PHASE), 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
