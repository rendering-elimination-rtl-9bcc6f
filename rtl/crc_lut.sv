// crc_lut: one 1-KB CRC look-up table (256 entries x 32 bits).
//
// Entry b holds the CRC-32 of the message made of byte b followed by
// ZERO_BYTES zero bytes. Placing a byte's table output under the right number
// of trailing zero bytes and XORing the outputs of several such tables gives
// the CRC of a multi-byte message in one step (table-driven parallel CRC).
// The Sign subunit uses ZERO_BYTES = 0..7, the Shift subunit 8..11.
//
// The table is a read-only memory whose contents are computed at elaboration
// from the polynomial in re_pkg; the read is combinational.
module crc_lut
  import re_pkg::*;
#(
  parameter int unsigned ZERO_BYTES = 0
) (
  input  logic [7:0]  addr,
  output logic [31:0] data
);

  localparam lut_table_t TABLE = crc_lut_table(ZERO_BYTES);

  always_comb data = TABLE[addr];

endmodule
