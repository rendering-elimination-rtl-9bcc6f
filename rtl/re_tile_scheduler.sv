// re_tile_scheduler: the redundancy check placed in front of the Raster
// Pipeline.
//
// After the geometry of a frame has been sorted (`start`), the tiles are
// visited in index order. For each tile the current and previous signatures
// are read from the Signature Buffer; if they are equal, Rendering Elimination
// is enabled for the frame and a previous frame exists, the tile is
// eliminated (`skip_valid` pulse): the Raster Pipeline never sees it and the
// Frame Buffer keeps last frame's colours. Otherwise the tile is offered to
// the Raster Pipeline on a valid/ready port. `done` pulses after the last tile.
//
// Timing: 2 cycles per eliminated tile (read, compare); a rendered tile adds
// the cycles until `disp_ready`. `re_enable` is sampled at `start`; the driver
// clears it for frames where shaders or textures changed. The visiting order
// and the never-eliminate-the-first-frame rule are this design's choices.
module re_tile_scheduler
  import re_pkg::*;
#(
  parameter int unsigned NUM_TILES = re_pkg::SCREEN_TILES,
  parameter int unsigned TILE_ID_W = $clog2(NUM_TILES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 re_enable,
  output logic                 busy,
  output logic                 done,
  // Signature Buffer read port
  output logic [TILE_ID_W-1:0] sb_rd_addr,
  input  logic [31:0]          sb_cur_sig,
  input  logic [31:0]          sb_prev_sig,
  input  logic                 sb_prev_valid,
  // Raster Pipeline dispatch
  output logic                 disp_valid,
  input  logic                 disp_ready,
  output logic [TILE_ID_W-1:0] disp_tile,
  // Eliminated tiles
  output logic                 skip_valid,
  output logic [TILE_ID_W-1:0] skip_tile
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_CMP, S_DISP} state_t;

  state_t               state;
  logic [TILE_ID_W-1:0] tile;
  logic                 re_en_q;
  logic                 last_tile;
  logic                 redundant;

  assign last_tile  = (tile == TILE_ID_W'(NUM_TILES - 1));
  assign redundant  = re_en_q && sb_prev_valid && (sb_cur_sig == sb_prev_sig);
  assign sb_rd_addr = tile;
  assign busy       = (state != S_IDLE);
  assign disp_valid = (state == S_DISP);
  assign disp_tile  = tile;
  assign skip_valid = (state == S_CMP) && redundant;
  assign skip_tile  = tile;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      tile    <= '0;
      re_en_q <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          tile    <= '0;
          re_en_q <= re_enable;
          state   <= S_READ;
        end
        S_READ: state <= S_CMP;
        S_CMP: begin
          if (!redundant) state <= S_DISP;
          else if (last_tile) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            tile  <= tile + 1'b1;
            state <= S_READ;
          end
        end
        S_DISP: if (disp_ready) begin
          if (last_tile) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            tile  <= tile + 1'b1;
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
