// fpisa_extract: the Extract step, switch stages MAU0 and MAU1.
//
// MAU0 splits the packed value into sign, exponent and fraction fields of
// metadata. MAU1 makes the implied leading 1 explicit by OR-ing bit FRAC_W into
// the fraction with the stage ALU, giving an unsigned mantissa right-aligned in
// an MREG_W-bit word (for FP32: 24 significant bits in a 32-bit word). This
// split follows the paper. Zero and subnormal inputs (exponent field 0) get no
// implied 1 and an effective exponent of 1, as in IEEE 754; that handling is
// this design's choice, the paper does not discuss it.
//
// Interface: valid/op/slot travel with the value. Timing: 2 cycles, one per
// stage, one value per cycle.
module fpisa_extract
  import fpisa_pkg::*;
#(
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned FRAC_W = 23,
  parameter int unsigned MREG_W = 32,
  parameter int unsigned SLOT_W = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  fp_op_e                    in_op,
  input  logic [SLOT_W-1:0]         in_slot,
  input  logic [EXP_W+FRAC_W:0]     in_fp,
  output logic                      out_valid,
  output fp_op_e                    out_op,
  output logic [SLOT_W-1:0]         out_slot,
  output logic                      out_sign,
  output logic [EXP_W-1:0]          out_exp,
  output logic [MREG_W-1:0]         out_mant
);

  // ---- MAU0: split bits ----
  logic                 s0_valid;
  fp_op_e               s0_op;
  logic [SLOT_W-1:0]    s0_slot;
  logic                 s0_sign;
  logic [EXP_W-1:0]     s0_exp;
  logic [FRAC_W-1:0]    s0_frac;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0_valid <= 1'b0;
      s0_op    <= FP_READ;
      s0_slot  <= '0;
      s0_sign  <= 1'b0;
      s0_exp   <= '0;
      s0_frac  <= '0;
    end else begin
      s0_valid <= in_valid;
      s0_op    <= in_op;
      s0_slot  <= in_slot;
      s0_sign  <= in_fp[EXP_W+FRAC_W];
      s0_exp   <= in_fp[FRAC_W +: EXP_W];
      s0_frac  <= in_fp[FRAC_W-1:0];
    end
  end

  // ---- MAU1: add implied "1" ----
  logic              is_sub;   // exponent field 0: zero or subnormal
  logic [MREG_W-1:0] mant_d;

  assign is_sub = (s0_exp == '0);

  fpisa_alu #(.W(MREG_W)) u_alu (
    .op  (is_sub ? ALU_PASS : ALU_OR),
    .a   (MREG_W'(s0_frac)),
    .b   ('0),
    .imm (MREG_W'(1) << FRAC_W),
    .y   (mant_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_op    <= FP_READ;
      out_slot  <= '0;
      out_sign  <= 1'b0;
      out_exp   <= '0;
      out_mant  <= '0;
    end else begin
      out_valid <= s0_valid;
      out_op    <= s0_op;
      out_slot  <= s0_slot;
      out_sign  <= s0_sign;
      out_exp   <= is_sub ? EXP_W'(1) : s0_exp;
      out_mant  <= mant_d;
    end
  end

  initial assert (MREG_W >= FRAC_W + 2) else $error("mantissa register too narrow");

endmodule
