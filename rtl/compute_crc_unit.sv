// compute_crc_unit: incremental CRC-32 of a variable-length block, one 64-bit
// subblock per clock.
//
// Each accepted subblock A_i updates the CRC_Out register with
//   CRC_Out <= Sign(A_i) ^ Shift(CRC_Out)
// where Sign is the CRC of the subblock and Shift is the CRC of CRC_Out
// followed by 64 zero bits. After n subblocks CRC_Out is the CRC of the whole
// n*64-bit block, and the subblock counter (the shift amount) holds n. Both
// structures follow the paper's Compute CRC unit.
//
// Interface: `clear` loads the initial value 0 into CRC_Out and resets the
// counter (the "0 (initial value)" multiplexer input); it must not coincide
// with `in_valid`. A subblock presented with `in_valid` is absorbed at the
// next rising edge, so a block of n subblocks takes n cycles plus the clear.
module compute_crc_unit
  import re_pkg::*;
#(
  parameter int unsigned SHAMT_W = re_pkg::SHAMT_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               in_valid,
  input  logic [63:0]        in_data,
  output logic [31:0]        crc_out,
  output logic [SHAMT_W-1:0] shift_amount
);

  logic [31:0] sign_crc, shift_crc;

  sign_subunit  u_sign  (.subblock(in_data), .crc(sign_crc));
  shift_subunit u_shift (.prev_crc(crc_out), .crc(shift_crc));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crc_out      <= '0;
      shift_amount <= '0;
    end else if (clear) begin
      crc_out      <= '0;
      shift_amount <= '0;
    end else if (in_valid) begin
      crc_out      <= sign_crc ^ shift_crc;
      shift_amount <= shift_amount + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(clear && in_valid))
    else $error("compute_crc_unit: clear and in_valid in the same cycle");

endmodule
