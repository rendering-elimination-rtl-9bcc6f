// constant_bitmap: one bit per screen tile recording whether the current
// drawcall's constants CRC has already been folded into that tile's signature.
//
// A drawcall's constants must enter a tile's signature once, however many of
// the drawcall's primitives overlap the tile. The Signature Unit does a
// test-and-set for every tile it updates: `was_set` shows the bit before the
// access (combinational from `tile`), and `test_set` sets it at the clock
// edge. `clear` empties the whole bitmap in one cycle; it is raised when a new
// set of constants arrives and, in this design, at the start of each frame.
module constant_bitmap
  import re_pkg::*;
#(
  parameter int unsigned NUM_TILES = re_pkg::SCREEN_TILES,
  parameter int unsigned TILE_ID_W = $clog2(NUM_TILES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [TILE_ID_W-1:0] tile,
  input  logic                 test_set,
  output logic                 was_set
);

  logic [NUM_TILES-1:0] bits;

  assign was_set = bits[tile];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         bits       <= '0;
    else if (clear)     bits       <= '0;
    else if (test_set)  bits[tile] <= 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) test_set |-> (32'(tile) < NUM_TILES))
    else $error("constant_bitmap: tile id out of range");

endmodule
