// shift_subunit: CRC-32 of the 64-bit message formed by a 32-bit CRC followed
// by 32 zero bits.
//
// If C is the CRC of a message M, this value is the CRC of M followed by 64
// zero bits, so it is the step that appends one all-zero 64-bit subblock
// behind a partial CRC (C * x^64 mod G). The 4 bytes of C go to four tables,
// named LUT_11 .. LUT_8 after the eight tables LUT_7 .. LUT_0 of the Sign
// subunit; the most significant byte uses LUT_11. In the 64-bit message the
// byte of LUT_11 is followed by 7 zero bytes and the byte of LUT_8 by 4, so
// these tables hold the same contents as the Sign subunit's LUT_7 .. LUT_4.
// The four outputs are XORed. Combinational, no state.
module shift_subunit (
  input  logic [31:0] prev_crc,
  output logic [31:0] crc
);

  logic [31:0] lut_out [4];

  for (genvar i = 0; i < 4; i++) begin : g_lut
    // Table LUT_(8+i): byte at bits [8*i+7 : 8*i], followed by i + 4 zero bytes.
    crc_lut #(.ZERO_BYTES(i + 4)) u_lut (
      .addr (prev_crc[8*i +: 8]),
      .data (lut_out[i])
    );
  end

  always_comb begin
    crc = '0;
    for (int i = 0; i < 4; i++) crc ^= lut_out[i];
  end

endmodule
