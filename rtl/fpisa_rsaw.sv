// fpisa_rsaw: stateful read-shift-add-write unit on the mantissa array, MAU4.
//
// The SLOTS-entry array holds each accumulator's mantissa as an MREG_W-bit
// two's-complement number, right-aligned, so the bits left of the FRAC_W+1
// significant bits are headroom for carries: FP32 in a 32-bit register leaves
// 7 bits, enough for 128 worst-case additions at one exponent. In one atomic
// step the unit reads the slot, shifts the stored value arithmetically right by
// the distance from MAU2 (needed when the packet's exponent is larger), adds
// or subtracts the aligned packet mantissa according to the packet's sign and
// operation, and writes the sum back. The sum is not renormalized; it leaves
// in metadata for the egress stages. A signed overflow of the add is reported
// on out_ovf; the wrapped sum is stored. The shift-then-add in one stage is the
// paper's RSAW proposal; the overflow flag is the paper's "can be detected and
// signaled"; READ/WRITE and clearing by reset are this design's choices.
// Arithmetic right shifts truncate toward minus infinity (no guard digits).
//
// Timing: read-modify-write within one cycle, outputs registered (1 cycle).
module fpisa_rsaw
  import fpisa_pkg::*;
#(
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned MREG_W = 32,
  parameter int unsigned SLOTS  = 256,
  parameter int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  fp_op_e                in_op,
  input  logic [SLOT_W-1:0]     in_slot,
  input  logic                  in_sign,
  input  logic [EXP_W-1:0]      in_exp,
  input  logic [MREG_W-1:0]     in_mant,      // aligned, unsigned
  input  logic [EXP_W-1:0]      in_mem_shift,
  output logic                  out_valid,
  output fp_op_e                out_op,
  output logic [SLOT_W-1:0]     out_slot,
  output logic [EXP_W-1:0]      out_exp,
  output logic [MREG_W-1:0]     out_mant,     // new signed accumulator
  output logic                  out_ovf
);

  logic [MREG_W-1:0] man_mem [SLOTS];

  logic [MREG_W-1:0] stored, shifted, sum;
  logic              negate, ovf, wr;

  assign stored = man_mem[in_slot];

  // Shift stage of the unit, using the metadata-distance shift.
  fpisa_alu #(.W(MREG_W)) u_shift (
    .op  (ALU_SRA_REG),
    .a   (stored),
    .b   (MREG_W'(in_mem_shift)),
    .imm ('0),
    .y   (shifted)
  );

  // Add stage: subtract when the effective sign is negative.
  assign negate = in_sign ^ (in_op == FP_SUB);

  always_comb begin
    sum = shifted;
    ovf = 1'b0;
    wr  = 1'b0;
    unique case (in_op)
      FP_ADD, FP_SUB: begin
        wr  = in_valid;
        sum = negate ? (shifted - in_mant) : (shifted + in_mant);
        // in_mant is non-negative and below 2^(MREG_W-1)
        ovf = negate ? ( shifted[MREG_W-1] & ~sum[MREG_W-1])
                     : (~shifted[MREG_W-1] &  sum[MREG_W-1]);
      end
      FP_WRITE: begin
        wr  = in_valid;
        sum = in_sign ? (MREG_W'(0) - in_mant) : in_mant;
      end
      default: sum = shifted;  // FP_READ: distance is 0
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < SLOTS; i++) man_mem[i] <= '0;
    end else if (wr) begin
      man_mem[in_slot] <= sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_op    <= FP_READ;
      out_slot  <= '0;
      out_exp   <= '0;
      out_mant  <= '0;
      out_ovf   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_op    <= in_op;
      out_slot  <= in_slot;
      out_exp   <= in_exp;
      out_mant  <= sum;
      out_ovf   <= in_valid & ovf;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid |-> !in_mant[MREG_W-1])
    else $error("packet mantissa must be non-negative");

endmodule
