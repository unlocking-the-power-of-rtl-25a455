// fpisa_alu: stateless match-action ALU with a two-operand shift.
//
// A PISA stage ALU computes y = f(a, b, imm) in one combinational step. Besides
// the usual integer operations it offers shifts whose distance is the second
// operand b, taken from packet metadata ("shl/shr reg.distance, reg.value"),
// rather than an immediate. FPISA needs such variable shifts to align
// mantissas and to renormalize them; with immediate-only shifts every distance
// costs a separate instruction. The metadata-operand shift follows the
// paper's proposal; the rest of the opcode set, and the rule that a distance
// of W or more shifts everything out (0 or all sign bits), are this design's
// own choices.
//
// Interface: op (alu_op_e), a (value), b (second operand / distance),
// imm (immediate). Timing: purely combinational.
module fpisa_alu
  import fpisa_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  alu_op_e        op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  input  logic [W-1:0]   imm,
  output logic [W-1:0]   y
);

  // Distances of W or more saturate.
  function automatic logic [W-1:0] shl(input logic [W-1:0] v, input logic [W-1:0] d);
    return (d >= W) ? '0 : (v << d);
  endfunction

  function automatic logic [W-1:0] shr(input logic [W-1:0] v, input logic [W-1:0] d);
    return (d >= W) ? '0 : (v >> d);
  endfunction

  function automatic logic [W-1:0] sra(input logic [W-1:0] v, input logic [W-1:0] d);
    return (d >= W) ? {W{v[W-1]}} : W'($signed(v) >>> d);
  endfunction

  always_comb begin
    unique case (op)
      ALU_PASS:    y = a;
      ALU_ADD:     y = a + b;
      ALU_SUB:     y = a - b;
      ALU_AND:     y = a & imm;
      ALU_OR:      y = a | imm;
      ALU_XOR:     y = a ^ imm;
      ALU_SHL_IMM: y = shl(a, imm);
      ALU_SHR_IMM: y = shr(a, imm);
      ALU_SHL_REG: y = shl(a, b);
      ALU_SHR_REG: y = shr(a, b);
      ALU_SRA_REG: y = sra(a, b);
      ALU_ZERO:    y = '0;
      default:     y = a;
    endcase
  end

endmodule
