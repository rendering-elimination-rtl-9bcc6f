// ot_queue: the Overlapped Tiles queue, a FIFO of tile identifiers.
//
// The Polygon List Builder pushes the identifiers of the tiles a primitive
// overlaps while the Signature Unit is still signing that primitive; the
// Signature Unit later pops them one by one to update each tile's signature.
// Each entry also carries a flag marking the last tile of the primitive.
// When the queue is full `push_ready` drops and the producer stalls: this is
// the geometry stall caused by primitives that cover many tiles.
//
// Valid/ready on both sides; a push and a pop may happen in the same cycle.
// First-word-fall-through: pop_data is valid whenever pop_valid is high.
// The depth (16) and the last-tile flag are this design's choices.
module ot_queue
  import re_pkg::*;
#(
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned TILE_ID_W = $clog2(re_pkg::SCREEN_TILES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 push_valid,
  output logic                 push_ready,
  input  logic [TILE_ID_W-1:0] push_tile,
  input  logic                 push_last,
  output logic                 pop_valid,
  input  logic                 pop_ready,
  output logic [TILE_ID_W-1:0] pop_tile,
  output logic                 pop_last,
  output logic                 full
);

  localparam int unsigned PTR_W = $clog2(DEPTH);

  logic [TILE_ID_W-1:0] tile_q [DEPTH];
  logic                 last_q [DEPTH];
  logic [PTR_W-1:0]     wr_ptr, rd_ptr;
  logic [PTR_W:0]       count;
  logic                 do_push, do_pop;

  assign full       = (count == (PTR_W+1)'(DEPTH));
  assign push_ready = !full;
  assign pop_valid  = (count != '0);
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;
  assign pop_tile   = tile_q[rd_ptr];
  assign pop_last   = last_q[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_push) begin
      tile_q[wr_ptr] <= push_tile;
      last_q[wr_ptr] <= push_last;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PTR_W'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PTR_W'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PTR_W+1)'(do_push) - (PTR_W+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= (PTR_W+1)'(DEPTH))
    else $error("ot_queue: count overflow");

endmodule
