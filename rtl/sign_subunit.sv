// sign_subunit: CRC-32 of one 64-bit subblock in a single combinational step.
//
// The subblock is split into 8 bytes; byte i (counting from the first byte,
// bits 63:56) is looked up in a table that holds the CRC of that byte followed
// by 7-i zero bytes, and the 8 table outputs are XORed. Eight 1-KB tables, one
// per byte, as in the evaluated configuration. Taking bits 63:56 as the first
// byte of the message is this design's choice.
module sign_subunit (
  input  logic [63:0] subblock,
  output logic [31:0] crc
);

  logic [31:0] lut_out [8];

  for (genvar i = 0; i < 8; i++) begin : g_lut
    // Byte at bits [8*i+7 : 8*i] is followed by i zero bytes.
    crc_lut #(.ZERO_BYTES(i)) u_lut (
      .addr (subblock[8*i +: 8]),
      .data (lut_out[i])
    );
  end

  always_comb begin
    crc = '0;
    for (int i = 0; i < 8; i++) crc ^= lut_out[i];
  end

endmodule
