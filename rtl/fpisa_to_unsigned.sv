// fpisa_to_unsigned: first renormalization step, MAU5.
//
// The accumulator mantissa arrives from the ingress pipeline in two's
// complement; this stage splits it into a sign bit and an unsigned magnitude so
// the leading-one search and the final packing can work on a magnitude. The
// magnitude of the most negative value, 2^(MREG_W-1), still fits the unsigned
// MREG_W-bit field. Follows the paper; the register stage is this design's.
//
// Timing: 1 cycle.
module fpisa_to_unsigned #(
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned MREG_W = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [EXP_W-1:0]      in_exp,
  input  logic [MREG_W-1:0]     in_mant,   // signed
  input  logic                  in_ovf,
  output logic                  out_valid,
  output logic [EXP_W-1:0]      out_exp,
  output logic                  out_sign,
  output logic [MREG_W-1:0]     out_mag,
  output logic                  out_ovf
);

  logic neg;
  assign neg = in_mant[MREG_W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_exp   <= '0;
      out_sign  <= 1'b0;
      out_mag   <= '0;
      out_ovf   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_exp   <= in_exp;
      out_sign  <= neg;
      out_mag   <= neg ? (MREG_W'(0) - in_mant) : in_mant;
      out_ovf   <= in_ovf;
    end
  end

endmodule
