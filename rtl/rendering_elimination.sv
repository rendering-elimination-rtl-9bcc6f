// rendering_elimination: the Rendering Elimination hardware of a tile-based
// GPU, from the Geometry Pipeline outputs to the tile dispatch of the Raster
// Pipeline.
//
// While a frame's geometry is sorted into tiles, the Signature Unit folds the
// scene constants (from the Command Processor) and the vertex attributes of
// each primitive (from the Polygon List Builder) into a CRC-32 signature per
// overlapped tile, held in the Signature Buffer. When the geometry is done,
// the tile scheduler check compares each tile's signature with the one of the
// preceding frame: equal inputs mean equal colours, so the tile is dropped
// before rasterisation and the Frame Buffer keeps its old contents; other
// tiles go to the Raster Pipeline.
//
// Frame protocol (this design's choice): pulse `frame_start`, stream the
// frame's constants, attributes and tile ids, then pulse `geom_done`. The tile
// walk starts once the Signature Unit has drained and ends with a
// `frame_done` pulse; the next `frame_start` must come after it. `re_enable`
// (sampled when the walk starts) lets the driver switch elimination off for a
// frame, e.g. after a shader or texture change. The first frame after reset
// is always rendered.
module rendering_elimination
  import re_pkg::*;
#(
  parameter int unsigned NUM_TILES = re_pkg::SCREEN_TILES,
  parameter int unsigned OTQ_DEPTH = 16,
  parameter int unsigned SHAMT_W   = re_pkg::SHAMT_BITS,
  parameter int unsigned TILE_ID_W = $clog2(NUM_TILES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // Frame control
  input  logic                 frame_start,
  input  logic                 geom_done,
  input  logic                 re_enable,
  output logic                 frame_done,
  // Command Processor: scene constants
  input  logic                 cp_valid,
  output logic                 cp_ready,
  input  subblock_t            cp_data,
  // Polygon List Builder: primitive attributes and overlapped tiles
  input  logic                 plb_valid,
  output logic                 plb_ready,
  input  subblock_t            plb_data,
  input  logic                 ot_valid,
  output logic                 ot_ready,
  input  logic [TILE_ID_W-1:0] ot_tile,
  input  logic                 ot_last,
  // Raster Pipeline: tiles to render
  output logic                 disp_valid,
  input  logic                 disp_ready,
  output logic [TILE_ID_W-1:0] disp_tile,
  // Eliminated tiles
  output logic                 skip_valid,
  output logic [TILE_ID_W-1:0] skip_tile,
  // Status
  output logic                 ot_full
);

  logic [TILE_ID_W-1:0] su_rd_addr, su_wr_addr, ts_rd_addr;
  logic [31:0]          su_rd_data, su_wr_data, ts_cur_sig, ts_prev_sig;
  logic                 su_wr_en, ts_prev_valid;
  logic                 su_idle, ts_busy, ts_start, geom_pending;

  signature_unit #(
    .NUM_TILES (NUM_TILES), .OTQ_DEPTH (OTQ_DEPTH),
    .SHAMT_W   (SHAMT_W),   .TILE_ID_W (TILE_ID_W)
  ) u_su (
    .clk, .rst_n, .frame_start,
    .cp_valid, .cp_ready, .cp_data,
    .plb_valid, .plb_ready, .plb_data,
    .ot_valid, .ot_ready, .ot_tile, .ot_last,
    .sb_rd_addr (su_rd_addr), .sb_rd_data (su_rd_data),
    .sb_wr_en   (su_wr_en),   .sb_wr_addr (su_wr_addr), .sb_wr_data (su_wr_data),
    .idle       (su_idle),
    .ot_full
  );

  signature_buffer #(.NUM_TILES(NUM_TILES), .TILE_ID_W(TILE_ID_W)) u_sb (
    .clk, .rst_n, .frame_start,
    .su_rd_addr, .su_rd_data, .su_wr_en, .su_wr_addr, .su_wr_data,
    .ts_rd_addr, .ts_cur_sig, .ts_prev_sig, .ts_prev_valid
  );

  // Start the tile walk once the geometry is done and the Signature Unit has
  // written its last tile.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          geom_pending <= 1'b0;
    else if (geom_done)  geom_pending <= 1'b1;
    else if (ts_start)   geom_pending <= 1'b0;
  end
  assign ts_start = geom_pending && su_idle && !ts_busy && !cp_valid && !plb_valid && !ot_valid;

  re_tile_scheduler #(.NUM_TILES(NUM_TILES), .TILE_ID_W(TILE_ID_W)) u_ts (
    .clk, .rst_n,
    .start        (ts_start),
    .re_enable,
    .busy         (ts_busy),
    .done         (frame_done),
    .sb_rd_addr   (ts_rd_addr),
    .sb_cur_sig   (ts_cur_sig),
    .sb_prev_sig  (ts_prev_sig),
    .sb_prev_valid(ts_prev_valid),
    .disp_valid, .disp_ready, .disp_tile,
    .skip_valid, .skip_tile
  );

endmodule
