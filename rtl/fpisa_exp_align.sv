// fpisa_exp_align: the exponent register array and the alignment decision, MAU2.
//
// Each slot of the SLOTS-entry exponent array holds the exponent of an
// accumulator whose signed mantissa lives in fpisa_rsaw two stages later. For
// ADD/SUB the stage compares the packet exponent e_p with the stored one e_s
// in a single read-modify-write: the larger one is written back and becomes the
// exponent of the sum, and the smaller operand's mantissa must be shifted right
// by the difference, so the stage emits two distances, one for the packet
// mantissa (applied in MAU3) and one for the stored mantissa (applied in MAU4).
// This follows the paper's full FPISA design. READ (emit the accumulator
// unchanged) and WRITE (load the packet value into the slot) are this design's
// additions, as are the array size and its clearing by reset.
//
// Timing: the array is read and written in the same cycle (one access per
// packet, as in a PISA stage); outputs are registered, 1 cycle. A packet per
// cycle, back-to-back packets to one slot included.
module fpisa_exp_align
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
  input  logic [MREG_W-1:0]     in_mant,
  output logic                  out_valid,
  output fp_op_e                out_op,
  output logic [SLOT_W-1:0]     out_slot,
  output logic                  out_sign,
  output logic [EXP_W-1:0]      out_exp,        // exponent of the result
  output logic [MREG_W-1:0]     out_mant,
  output logic [EXP_W-1:0]      out_meta_shift, // right shift of packet mantissa
  output logic [EXP_W-1:0]      out_mem_shift   // right shift of stored mantissa
);

  logic [EXP_W-1:0] exp_mem [SLOTS];

  logic [EXP_W-1:0] e_s, new_exp, meta_sh, mem_sh;
  logic             wr;

  assign e_s = exp_mem[in_slot];

  always_comb begin
    new_exp = e_s;
    meta_sh = '0;
    mem_sh  = '0;
    wr      = 1'b0;
    unique case (in_op)
      FP_ADD, FP_SUB: begin
        wr = in_valid;
        if (in_exp >= e_s) begin
          new_exp = in_exp;
          mem_sh  = in_exp - e_s;
        end else begin
          meta_sh = e_s - in_exp;
        end
      end
      FP_WRITE: begin
        wr      = in_valid;
        new_exp = in_exp;
      end
      default: ;  // FP_READ
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < SLOTS; i++) exp_mem[i] <= '0;
    end else if (wr) begin
      exp_mem[in_slot] <= new_exp;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid      <= 1'b0;
      out_op         <= FP_READ;
      out_slot       <= '0;
      out_sign       <= 1'b0;
      out_exp        <= '0;
      out_mant       <= '0;
      out_meta_shift <= '0;
      out_mem_shift  <= '0;
    end else begin
      out_valid      <= in_valid;
      out_op         <= in_op;
      out_slot       <= in_slot;
      out_sign       <= in_sign;
      out_exp        <= new_exp;
      out_mant       <= in_mant;
      out_meta_shift <= meta_sh;
      out_mem_shift  <= mem_sh;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid |-> (32'(in_slot) < SLOTS))
    else $error("slot index out of range");

endmodule
