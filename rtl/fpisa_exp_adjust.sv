// fpisa_exp_adjust: exponent correction after renormalization, MAU7.
//
// A right shift of the mantissa by k in MAU6 multiplies the exponent by 2^k,
// so k is added to the exponent; a left shift by k subtracts k. The result is
// carried as a signed value two bits wider than the exponent so MAU8 can see
// when it leaves the range of the format (>= all ones, or <= 0). The
// correction follows the paper; the widened range is this design's.
//
// Timing: 1 cycle.
module fpisa_exp_adjust
  import fpisa_pkg::*;
#(
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned MREG_W = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [EXP_W-1:0]           in_exp,
  input  logic                       in_sign,
  input  logic [MREG_W-1:0]          in_mag,
  input  shift_dir_e                 in_dir,
  input  logic [SH_AMT_W-1:0]        in_amt,
  input  logic                       in_zero,
  input  logic                       in_ovf,
  output logic                       out_valid,
  output logic signed [EXP_W+1:0]    out_exp,
  output logic                       out_sign,
  output logic [MREG_W-1:0]          out_mag,
  output logic                       out_zero,
  output logic                       out_ovf
);

  localparam int unsigned XW = (EXP_W + 2 > SH_AMT_W + 1) ? EXP_W + 2 : SH_AMT_W + 1;

  logic signed [XW-1:0] e, a, adj;

  assign e = $signed(XW'(in_exp));
  assign a = $signed(XW'(in_amt));

  always_comb begin
    unique case (in_dir)
      SH_RIGHT: adj = e + a;
      SH_LEFT:  adj = e - a;
      default:  adj = e;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_exp   <= '0;
      out_sign  <= 1'b0;
      out_mag   <= '0;
      out_zero  <= 1'b1;
      out_ovf   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_exp   <= (EXP_W+2)'(adj);
      out_sign  <= in_sign;
      out_mag   <= in_mag;
      out_zero  <= in_zero;
      out_ovf   <= in_ovf;
    end
  end

endmodule
