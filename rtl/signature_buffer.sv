// signature_buffer: on-chip store of the 32-bit input signature of every
// screen tile, for the frame being built (current bank) and for the frame
// before it (previous bank).
//
// The Signature Unit reads and rewrites entries of the current bank while the
// frame's geometry is processed; afterwards the tile scheduler reads, for one
// tile, both the current and the previous signature. `frame_start` swaps the
// roles of the two banks and invalidates the new current bank, so that every
// tile of a new frame starts from the CRC initial value 0 without a
// 3600-cycle clear: an entry not yet written in the frame reads as 0.
// `ts_prev_valid` is high once the previous bank holds a whole frame, i.e.
// from the second frame after reset on.
//
// All reads are synchronous (data one cycle after the address); a write is
// seen by a read of the same entry in the next cycle. The per-entry valid
// bits and the port arrangement are this design's choices; the paper gives
// the buffer's contents (current and previous frame signatures, one per tile).
module signature_buffer
  import re_pkg::*;
#(
  parameter int unsigned NUM_TILES = re_pkg::SCREEN_TILES,
  parameter int unsigned TILE_ID_W = $clog2(NUM_TILES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 frame_start,
  // Signature Unit port (current bank)
  input  logic [TILE_ID_W-1:0] su_rd_addr,
  output logic [31:0]          su_rd_data,
  input  logic                 su_wr_en,
  input  logic [TILE_ID_W-1:0] su_wr_addr,
  input  logic [31:0]          su_wr_data,
  // Tile scheduler port (both banks)
  input  logic [TILE_ID_W-1:0] ts_rd_addr,
  output logic [31:0]          ts_cur_sig,
  output logic [31:0]          ts_prev_sig,
  output logic                 ts_prev_valid
);

  logic [31:0]          mem_q [2][NUM_TILES];
  logic [NUM_TILES-1:0] valid_q [2];
  logic                 cur_bank;
  logic                 started;

  // Signature storage: write into the current bank, three synchronous reads.
  always_ff @(posedge clk) begin
    if (su_wr_en) mem_q[cur_bank][su_wr_addr] <= su_wr_data;
    su_rd_data  <= valid_q[cur_bank][su_rd_addr]  ? mem_q[cur_bank][su_rd_addr]  : 32'h0;
    ts_cur_sig  <= valid_q[cur_bank][ts_rd_addr]  ? mem_q[cur_bank][ts_rd_addr]  : 32'h0;
    ts_prev_sig <= valid_q[!cur_bank][ts_rd_addr] ? mem_q[!cur_bank][ts_rd_addr] : 32'h0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_bank      <= 1'b0;
      started       <= 1'b0;
      ts_prev_valid <= 1'b0;
      valid_q[0]    <= '0;
      valid_q[1]    <= '0;
    end else if (frame_start) begin
      cur_bank          <= !cur_bank;
      valid_q[!cur_bank] <= '0;
      started           <= 1'b1;
      ts_prev_valid     <= started;
    end else if (su_wr_en) begin
      valid_q[cur_bank][su_wr_addr] <= 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(frame_start && su_wr_en))
    else $error("signature_buffer: write during frame_start");

endmodule
