// re_pkg: types, sizes and CRC helpers shared by the Rendering Elimination blocks.
//
// Signatures are CRC-32 with generator polynomial 0x04C11DB7, processed most
// significant bit first, with initial value 0 and no final inversion. A zero
// initial value and no final XOR make the CRC linear, which is what allows the
// CRC of a concatenation to be assembled from the CRCs of its parts by XOR
// (the incremental scheme of the Signature Unit). The polynomial and bit order
// are this design's choice; the scheme only fixes "CRC32".
//
// Default sizes follow the evaluated configuration: a 1196x768 screen split
// into 16x16-pixel tiles gives 75 x 48 = 3600 tiles.
package re_pkg;

  localparam logic [31:0] CRC_POLY = 32'h04C1_1DB7;

  localparam int unsigned SCREEN_W  = 1196;
  localparam int unsigned SCREEN_H  = 768;
  localparam int unsigned TILE_PIX  = 16;
  localparam int unsigned TILES_X   = (SCREEN_W + TILE_PIX - 1) / TILE_PIX;  // 75
  localparam int unsigned TILES_Y   = (SCREEN_H + TILE_PIX - 1) / TILE_PIX;  // 48
  localparam int unsigned SCREEN_TILES = TILES_X * TILES_Y;                    // 3600

  // Width of a subblock counter (shift amount, in 64-bit subblocks).
  localparam int unsigned SHAMT_BITS = 16;

  // A 64-bit subblock of a constants block or of a primitive's attributes.
  typedef struct packed {
    logic [63:0] data;
    logic        last;   // final subblock of the block
  } subblock_t;

  // One 256 x 32-bit table, packed so it can be returned by a function.
  typedef logic [255:0][31:0] lut_table_t;

  // Bit-serial CRC step over `nbits` bits of `msg` (MSB first), starting from `crc`.
  function automatic logic [31:0] crc_shift_in(logic [31:0] crc, logic [7:0] msg, int unsigned nbits);
    logic [31:0] r;
    logic        fb;
    r = crc;
    for (int unsigned i = 0; i < nbits; i++) begin
      fb = r[31] ^ msg[nbits-1-i];
      r  = {r[30:0], 1'b0};
      if (fb) r = r ^ CRC_POLY;
    end
    return r;
  endfunction

  // Table of CRC32(byte b followed by `zero_bytes` zero bytes) for every b.
  function automatic lut_table_t crc_lut_table(int unsigned zero_bytes);
    lut_table_t t;
    logic [31:0] r;
    for (int unsigned b = 0; b < 256; b++) begin
      r = crc_shift_in(32'h0, 8'(b), 8);
      for (int unsigned z = 0; z < zero_bytes; z++)
        r = crc_shift_in(r, 8'h00, 8);
      t[b] = r;
    end
    return t;
  endfunction

endpackage
