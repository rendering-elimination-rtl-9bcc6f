// signature_unit: builds, incrementally and while the geometry is processed,
// the CRC-32 signature of the inputs of every screen tile.
//
// The input message of a tile is, drawcall after drawcall, the drawcall's
// scene constants (once) followed by the attributes of each of the drawcall's
// primitives that overlap the tile. Because primitives arrive in submission
// order, not tile order, each tile signature is extended piece by piece using
//   CRC(M . P) = CRC(CRC(M) << |P|) ^ CRC(P)
// where |P| is the length of the new piece in 64-bit subblocks.
//
// Data path (as in the paper's Signature Unit):
//  * A Compute CRC unit signs a constants block (from the Command Processor)
//    or a primitive's attributes (from the Polygon List Builder), one 64-bit
//    subblock per cycle. The result and its length go to the Constants CRC /
//    Shift Amount C or the Primitive CRC / Shift Amount P registers.
//  * The Polygon List Builder pushes the ids of the tiles the primitive
//    overlaps into the OT queue.
//  * For each popped tile the partial signature is read from the Signature
//    Buffer, shifted by the Accumulate CRC unit and XORed with the piece's
//    CRC, then written back. A bitmap makes the constants enter each tile once
//    per drawcall: on the first visit of a tile the signature is extended
//    first by the constants and then by the primitive.
//
// Control choices of this design: the Compute CRC unit may sign the next
// primitive while the tile list of the current one is traversed (its result
// waits in CRC_Out until the Primitive CRC register is free); a constants
// block is only accepted when no primitive is pending, so the producer must
// hand over a drawcall's constants after the previous drawcall's primitives
// and before its own. Constants win when both inputs are valid.
//
// Constants blocks that follow each other with no primitive in between form
// one set: the later block is appended to the Constants CRC (using the idle
// Accumulate CRC unit) and Shift Amount C grows. The first constants block
// after a primitive starts a new set and clears the bitmap, as does
// `frame_start`.
//
// Cost per tile update: n + 3 cycles for a primitive of n subblocks, plus
// m + 1 for a tile first touched by a drawcall with m constant subblocks.
module signature_unit
  import re_pkg::*;
#(
  parameter int unsigned NUM_TILES = re_pkg::SCREEN_TILES,
  parameter int unsigned OTQ_DEPTH = 16,
  parameter int unsigned SHAMT_W   = re_pkg::SHAMT_BITS,
  parameter int unsigned TILE_ID_W = $clog2(NUM_TILES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 frame_start,
  // Command Processor: constant subblocks
  input  logic                 cp_valid,
  output logic                 cp_ready,
  input  subblock_t            cp_data,
  // Polygon List Builder: attribute subblocks of one primitive
  input  logic                 plb_valid,
  output logic                 plb_ready,
  input  subblock_t            plb_data,
  // Polygon List Builder: overlapped tile ids
  input  logic                 ot_valid,
  output logic                 ot_ready,
  input  logic [TILE_ID_W-1:0] ot_tile,
  input  logic                 ot_last,
  // Signature Buffer (current frame bank)
  output logic [TILE_ID_W-1:0] sb_rd_addr,
  input  logic [31:0]          sb_rd_data,
  output logic                 sb_wr_en,
  output logic [TILE_ID_W-1:0] sb_wr_addr,
  output logic [31:0]          sb_wr_data,
  // Status
  output logic                 idle,
  output logic                 ot_full
);

  // ---------------------------------------------------------------- state
  typedef enum logic [2:0] {C_IDLE, C_CONST, C_CONST_FIN, C_CONST_CAT, C_PRIM, C_PRIM_FIN} cstate_t;
  typedef enum logic [2:0] {T_IDLE, T_POP, T_READ, T_ACC_C, T_ACC_P} tstate_t;

  cstate_t cstate;
  tstate_t tstate;

  logic [31:0]          const_crc, prim_crc;     // Constants CRC, Primitive CRC
  logic [SHAMT_W-1:0]   shamt_c, shamt_p;        // Shift Amount C, Shift Amount P
  logic [TILE_ID_W-1:0] cur_tile;
  logic                 cur_last;
  logic                 prims_since_const;       // a primitive was signed since the last constants
  logic [31:0]          cat_crc;                 // CRC of a constants block being appended
  logic [SHAMT_W-1:0]   cat_shamt;
  // Accumulate CRC unit (instantiated below), shared by both FSMs
  logic               acc_start, acc_busy, acc_done;
  logic [31:0]        acc_init, acc_crc;
  logic [SHAMT_W-1:0] acc_shamt;

  // ---------------------------------------------------------------- compute
  logic               cu_clear, cu_valid;
  logic [63:0]        cu_data;
  logic [31:0]        cu_crc;
  logic [SHAMT_W-1:0] cu_shamt;
  logic               take_cp, take_plb;
  logic               prim_reg_free;

  // The Primitive CRC register is free when no tile list is being traversed.
  assign prim_reg_free = (tstate == T_IDLE);

  always_comb begin
    take_cp  = 1'b0;
    take_plb = 1'b0;
    unique case (cstate)
      C_IDLE: begin
        if (cp_valid && prim_reg_free) take_cp  = 1'b1;
        else if (!cp_valid)            take_plb = plb_valid;
      end
      C_CONST: take_cp  = cp_valid;
      C_PRIM:  take_plb = plb_valid;
      default: ;
    endcase
  end

  assign cp_ready  = take_cp;
  assign plb_ready = take_plb;
  assign cu_valid  = take_cp || take_plb;
  assign cu_data   = take_cp ? cp_data.data : plb_data.data;
  assign cu_clear  = (cstate == C_CONST_FIN) || (cstate == C_PRIM_FIN && prim_reg_free);

  compute_crc_unit #(.SHAMT_W(SHAMT_W)) u_compute (
    .clk, .rst_n,
    .clear        (cu_clear),
    .in_valid     (cu_valid),
    .in_data      (cu_data),
    .crc_out      (cu_crc),
    .shift_amount (cu_shamt)
  );

  logic bm_clear;
  logic tiles_start;
  assign bm_clear    = (cstate == C_CONST_FIN && prims_since_const) || frame_start;
  assign tiles_start = (cstate == C_PRIM_FIN) && prim_reg_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate            <= C_IDLE;
      const_crc         <= '0;
      shamt_c           <= '0;
      prim_crc          <= '0;
      shamt_p           <= '0;
      cat_crc           <= '0;
      cat_shamt         <= '0;
      prims_since_const <= 1'b1;
    end else begin
      unique case (cstate)
        C_IDLE: begin
          if (take_cp)  cstate <= cp_data.last  ? C_CONST_FIN : C_CONST;
          if (take_plb) cstate <= plb_data.last ? C_PRIM_FIN  : C_PRIM;
        end
        C_CONST: if (take_cp  && cp_data.last)  cstate <= C_CONST_FIN;
        C_PRIM:  if (take_plb && plb_data.last) cstate <= C_PRIM_FIN;
        C_CONST_FIN: begin
          if (prims_since_const) begin
            // First constants after a drawcall: a new set replaces the old.
            const_crc <= cu_crc;
            shamt_c   <= cu_shamt;
            cstate    <= C_IDLE;
          end else begin
            // Constants directly after constants: the set grows. The
            // Accumulate CRC unit (idle here) shifts the old set's CRC.
            cat_crc   <= cu_crc;
            cat_shamt <= cu_shamt;
            cstate    <= C_CONST_CAT;
          end
          prims_since_const <= 1'b0;
        end
        C_CONST_CAT: if (acc_done) begin
          const_crc <= acc_crc ^ cat_crc;
          shamt_c   <= shamt_c + cat_shamt;
          cstate    <= C_IDLE;
        end
        C_PRIM_FIN: if (prim_reg_free) begin
          prim_crc          <= cu_crc;
          shamt_p           <= cu_shamt;
          prims_since_const <= 1'b1;
          cstate            <= C_IDLE;
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- OT queue
  logic                 q_pop_valid, q_pop_ready, q_pop_last;
  logic [TILE_ID_W-1:0] q_pop_tile;

  ot_queue #(.DEPTH(OTQ_DEPTH), .TILE_ID_W(TILE_ID_W)) u_otq (
    .clk, .rst_n,
    .push_valid (ot_valid),
    .push_ready (ot_ready),
    .push_tile  (ot_tile),
    .push_last  (ot_last),
    .pop_valid  (q_pop_valid),
    .pop_ready  (q_pop_ready),
    .pop_tile   (q_pop_tile),
    .pop_last   (q_pop_last),
    .full       (ot_full)
  );

  // ---------------------------------------------------------------- bitmap
  logic bm_was_set, bm_test_set;
  logic need_const;

  constant_bitmap #(.NUM_TILES(NUM_TILES), .TILE_ID_W(TILE_ID_W)) u_bitmap (
    .clk, .rst_n,
    .clear    (bm_clear),
    .tile     (q_pop_tile),
    .test_set (bm_test_set),
    .was_set  (bm_was_set)
  );

  // ---------------------------------------------------------------- accumulate
  accumulate_crc_unit #(.SHAMT_W(SHAMT_W)) u_accum (
    .clk, .rst_n,
    .start        (acc_start),
    .init_crc     (acc_init),
    .shift_amount (acc_shamt),
    .busy         (acc_busy),
    .done         (acc_done),
    .crc_accum    (acc_crc)
  );

  // ---------------------------------------------------------------- tile engine
  assign q_pop_ready = (tstate == T_POP);
  assign bm_test_set = (tstate == T_POP) && q_pop_valid;
  assign sb_rd_addr  = q_pop_tile;

  always_comb begin
    acc_start  = 1'b0;
    acc_init   = sb_rd_data;
    acc_shamt  = need_const ? shamt_c : shamt_p;
    sb_wr_en   = 1'b0;
    sb_wr_addr = cur_tile;
    sb_wr_data = acc_crc ^ prim_crc;
    unique case (tstate)
      T_IDLE: if (cstate == C_CONST_FIN && !prims_since_const) begin
        // Append a constants block to the current set (see C_CONST_CAT).
        acc_start = 1'b1;
        acc_init  = const_crc;
        acc_shamt = cu_shamt;
      end
      T_READ: acc_start = 1'b1;
      T_ACC_C: if (acc_done) begin
        // Second step: constants folded in, now extend by the primitive.
        acc_start = 1'b1;
        acc_init  = acc_crc ^ const_crc;
        acc_shamt = shamt_p;
      end
      T_ACC_P: sb_wr_en = acc_done;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate     <= T_IDLE;
      cur_tile   <= '0;
      cur_last   <= 1'b0;
      need_const <= 1'b0;
    end else begin
      unique case (tstate)
        T_IDLE: if (tiles_start) tstate <= T_POP;
        T_POP: if (q_pop_valid) begin
          cur_tile   <= q_pop_tile;
          cur_last   <= q_pop_last;
          need_const <= !bm_was_set;
          tstate     <= T_READ;
        end
        T_READ: tstate <= need_const ? T_ACC_C : T_ACC_P;
        T_ACC_C: if (acc_done) tstate <= T_ACC_P;
        T_ACC_P: if (acc_done) tstate <= cur_last ? T_IDLE : T_POP;
        default: tstate <= T_IDLE;
      endcase
    end
  end

  assign idle = (cstate == C_IDLE) && (tstate == T_IDLE) && !q_pop_valid;

  assert property (@(posedge clk) disable iff (!rst_n) acc_start |-> !acc_busy)
    else $error("signature_unit: accumulate unit started while busy");

endmodule
