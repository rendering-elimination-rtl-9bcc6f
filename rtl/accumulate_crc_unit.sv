// accumulate_crc_unit: appends `shift_amount` all-zero 64-bit subblocks to a
// tile's partial CRC-32, one subblock per clock.
//
// This is the CRC of (previous CRC << 64*n). Since the appended data are all
// zero, each step only re-signs the register through a Shift subunit:
//   cycle 0 (start): CRC_Accum <= init_crc       (initial value multiplexer)
//   cycles 1..n    : CRC_Accum <= Shift(CRC_Accum)
// `done` pulses for one cycle with the result in `crc_accum`; it rises n+1
// cycles after `start` (1 cycle for n = 0). `start` while `busy` is ignored.
// The iterative structure is the paper's; the start/done handshake is this
// design's choice.
module accumulate_crc_unit
  import re_pkg::*;
#(
  parameter int unsigned SHAMT_W = re_pkg::SHAMT_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        init_crc,
  input  logic [SHAMT_W-1:0] shift_amount,
  output logic               busy,
  output logic               done,
  output logic [31:0]        crc_accum
);

  logic [31:0]        shift_crc;
  logic [SHAMT_W-1:0] remaining;

  shift_subunit u_shift (.prev_crc(crc_accum), .crc(shift_crc));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crc_accum <= '0;
      remaining <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          crc_accum <= init_crc;
          remaining <= shift_amount;
          if (shift_amount == '0) done <= 1'b1;
          else                    busy <= 1'b1;
        end
      end else begin
        crc_accum <= shift_crc;
        remaining <= remaining - 1'b1;
        if (remaining == SHAMT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
