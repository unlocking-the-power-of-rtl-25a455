// fpisa_merge: assembly of the packed result, MAU8.
//
// Merges the sign, the adjusted exponent and the low FRAC_W bits of the
// normalized mantissa (the leading 1 at bit FRAC_W is dropped again) into one
// IEEE-style word. Results outside the normal range are this design's choice,
// as the paper does not discuss them: a zero magnitude or an exponent <= 0
// gives a signed zero (flush to zero), an exponent >= all ones gives a signed
// infinity.
//
// Timing: 1 cycle.
module fpisa_merge #(
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned FRAC_W = 23,
  parameter int unsigned MREG_W = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [EXP_W+1:0]    in_exp,
  input  logic                       in_sign,
  input  logic [MREG_W-1:0]          in_mag,
  input  logic                       in_zero,
  input  logic                       in_ovf,
  output logic                       out_valid,
  output logic [EXP_W+FRAC_W:0]      out_fp,
  output logic                       out_ovf
);

  localparam logic signed [EXP_W+1:0] EMAX = (EXP_W+2)'((1 << EXP_W) - 1);

  logic [EXP_W+FRAC_W:0] fp_d;

  always_comb begin
    if (in_zero || in_exp <= 0)
      fp_d = {in_sign, {(EXP_W+FRAC_W){1'b0}}};
    else if (in_exp >= EMAX)
      fp_d = {in_sign, {EXP_W{1'b1}}, {FRAC_W{1'b0}}};
    else
      fp_d = {in_sign, in_exp[EXP_W-1:0], in_mag[FRAC_W-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_fp    <= '0;
      out_ovf   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_fp    <= fp_d;
      out_ovf   <= in_ovf;
    end
  end

  // The renormalization table must leave a non-zero magnitude with its
  // leading 1 at bit FRAC_W; only the bits below it are merged.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (in_valid && !in_zero) |-> (in_mag[MREG_W-1:FRAC_W] == 1))
    else $error("magnitude not normalized");

endmodule
