// re_tb_pkg: reference model shared by the testbenches.
//
// The reference CRC is the plain bit-serial definition: the message is fed
// bit by bit, most significant bit of each byte first, into a 32-bit shift
// register that starts at zero, with feedback polynomial 0x04C11DB7 and no
// final inversion. Extending a message just continues the shift register, so
// the reference never uses tables or the XOR-combination identity the design
// relies on.
package re_tb_pkg;

  localparam logic [31:0] POLY = 32'h04C1_1DB7;

  function automatic logic [31:0] ref_crc_byte(logic [31:0] crc, logic [7:0] b);
    logic [31:0] r = crc;
    for (int i = 7; i >= 0; i--) begin
      logic fb = r[31] ^ b[i];
      r = r << 1;
      if (fb) r ^= POLY;
    end
    return r;
  endfunction

  // Continue `crc` over a 64-bit word, bits 63:56 first.
  function automatic logic [31:0] ref_crc_word(logic [31:0] crc, logic [63:0] w);
    logic [31:0] r = crc;
    for (int i = 7; i >= 0; i--) r = ref_crc_byte(r, w[8*i +: 8]);
    return r;
  endfunction

  // Continue `crc` over n all-zero bytes.
  function automatic logic [31:0] ref_crc_zeros(logic [31:0] crc, int n);
    logic [31:0] r = crc;
    for (int i = 0; i < n; i++) r = ref_crc_byte(r, 8'h00);
    return r;
  endfunction

  function automatic logic [63:0] rand64();
    return {$urandom, $urandom};
  endfunction

endpackage
