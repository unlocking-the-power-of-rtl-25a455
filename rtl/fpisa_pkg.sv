// fpisa_pkg: types shared by the FPISA pipeline.
//
// FPISA adds floating-point numbers inside a match-action switch pipeline by
// keeping the exponent and a two's-complement mantissa in two register arrays
// that live in different stages, and by renormalizing only on the way out.
// This package holds the per-packet operation code, the opcodes of the
// stateless ALU with its metadata-operand shift, and the shift action that
// the renormalization TCAM returns. The operation set (ADD, SUB, READ, WRITE)
// is this design's choice; the paper describes only addition (and subtraction
// as the same flow with the sign flipped).
package fpisa_pkg;

  // Operation a packet performs on its register slot.
  typedef enum logic [1:0] {
    FP_ADD   = 2'd0,  // accumulator += value
    FP_SUB   = 2'd1,  // accumulator -= value
    FP_READ  = 2'd2,  // leave the accumulator alone, emit it
    FP_WRITE = 2'd3   // accumulator := value
  } fp_op_e;

  // Stateless ALU opcodes. SHL_REG/SHR_REG/SRA_REG take the distance from
  // the second (metadata) operand: the proposed "shl/shr reg.distance, reg.value".
  typedef enum logic [3:0] {
    ALU_PASS    = 4'd0,
    ALU_ADD     = 4'd1,
    ALU_SUB     = 4'd2,
    ALU_AND     = 4'd3,
    ALU_OR      = 4'd4,
    ALU_XOR     = 4'd5,
    ALU_SHL_IMM = 4'd6,
    ALU_SHR_IMM = 4'd7,
    ALU_SHL_REG = 4'd8,
    ALU_SHR_REG = 4'd9,
    ALU_SRA_REG = 4'd10,
    ALU_ZERO    = 4'd11
  } alu_op_e;

  // Shift action of a renormalization table entry.
  typedef enum logic [1:0] {
    SH_NONE  = 2'd0,
    SH_RIGHT = 2'd1,
    SH_LEFT  = 2'd2
  } shift_dir_e;

  // Width of a shift amount in a table action.
  localparam int unsigned SH_AMT_W = 8;

endpackage
