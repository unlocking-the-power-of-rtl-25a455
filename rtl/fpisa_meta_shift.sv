// fpisa_meta_shift: alignment of the packet mantissa, MAU3.
//
// The packet (metadata) mantissa is shifted right by the distance MAU2
// computed, so that it has the same scale as the accumulator. The stage's match
// table is keyed on the operation and selects the ALU instruction: a
// two-operand logical right shift whose distance is the metadata field itself
// for ADD/SUB, a clear for READ (nothing is added), and a pass for WRITE. With
// the proposed metadata-distance shift one table entry covers every distance;
// reducing the exact-match table to this op lookup is this design's choice.
// Bits shifted out are dropped (no guard digits, as in the paper).
//
// Timing: 1 cycle.
module fpisa_meta_shift
  import fpisa_pkg::*;
#(
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned MREG_W = 32,
  parameter int unsigned SLOT_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  fp_op_e                in_op,
  input  logic [SLOT_W-1:0]     in_slot,
  input  logic                  in_sign,
  input  logic [EXP_W-1:0]      in_exp,
  input  logic [MREG_W-1:0]     in_mant,
  input  logic [EXP_W-1:0]      in_meta_shift,
  input  logic [EXP_W-1:0]      in_mem_shift,
  output logic                  out_valid,
  output fp_op_e                out_op,
  output logic [SLOT_W-1:0]     out_slot,
  output logic                  out_sign,
  output logic [EXP_W-1:0]      out_exp,
  output logic [MREG_W-1:0]     out_mant,
  output logic [EXP_W-1:0]      out_mem_shift
);

  // Exact-match table on the operation: action = ALU instruction.
  alu_op_e           act;
  logic [MREG_W-1:0] mant_d;

  always_comb begin
    unique case (in_op)
      FP_ADD, FP_SUB: act = ALU_SHR_REG;
      FP_READ:        act = ALU_ZERO;
      default:        act = ALU_PASS;   // FP_WRITE
    endcase
  end

  fpisa_alu #(.W(MREG_W)) u_alu (
    .op  (act),
    .a   (in_mant),
    .b   (MREG_W'(in_meta_shift)),
    .imm ('0),
    .y   (mant_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid     <= 1'b0;
      out_op        <= FP_READ;
      out_slot      <= '0;
      out_sign      <= 1'b0;
      out_exp       <= '0;
      out_mant      <= '0;
      out_mem_shift <= '0;
    end else begin
      out_valid     <= in_valid;
      out_op        <= in_op;
      out_slot      <= in_slot;
      out_sign      <= in_sign;
      out_exp       <= in_exp;
      out_mant      <= mant_d;
      out_mem_shift <= in_mem_shift;
    end
  end

endmodule
