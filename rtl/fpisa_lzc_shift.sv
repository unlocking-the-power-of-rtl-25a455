// fpisa_lzc_shift: leading-one search and normalizing shift, MAU6.
//
// The magnitude of the accumulator is looked up in the LPM TCAM (lpm_tcam),
// whose matching entry names the shift that places the leading 1 at bit
// FRAC_W. The stage ALU applies it with the metadata-distance shift (left or
// right), and the direction and amount go on to MAU7, which corrects the
// exponent. Right shifts truncate: there are no guard digits. A zero
// magnitude matches no entry (hit = 0, default action) and is flagged as zero.
// Follows the paper; the flag and the table write port are this design's.
//
// Timing: TCAM lookup and shift in one cycle, outputs registered (1 cycle).
module fpisa_lzc_shift
  import fpisa_pkg::*;
#(
  parameter int unsigned EXP_W   = 8,
  parameter int unsigned FRAC_W  = 23,
  parameter int unsigned MREG_W  = 32,
  parameter int unsigned ENTRIES = MREG_W,
  parameter int unsigned IDX_W   = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  parameter int unsigned PLEN_W  = $clog2(MREG_W + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [EXP_W-1:0]      in_exp,
  input  logic                  in_sign,
  input  logic [MREG_W-1:0]     in_mag,
  input  logic                  in_ovf,
  output logic                  out_valid,
  output logic [EXP_W-1:0]      out_exp,
  output logic                  out_sign,
  output logic [MREG_W-1:0]     out_mag,     // leading 1 at bit FRAC_W
  output shift_dir_e            out_dir,
  output logic [SH_AMT_W-1:0]   out_amt,
  output logic                  out_zero,
  output logic                  out_ovf,
  // control-plane write into the TCAM
  input  logic                  tcam_wr_en,
  input  logic [IDX_W-1:0]      tcam_wr_idx,
  input  logic                  tcam_wr_valid,
  input  logic [MREG_W-1:0]     tcam_wr_value,
  input  logic [PLEN_W-1:0]     tcam_wr_plen,
  input  shift_dir_e            tcam_wr_dir,
  input  logic [SH_AMT_W-1:0]   tcam_wr_amt
);

  logic                 hit;
  shift_dir_e           dir;
  logic [SH_AMT_W-1:0]  amt;
  alu_op_e              alu_op;
  logic [MREG_W-1:0]    mag_d;

  lpm_tcam #(.KEY_W(MREG_W), .ENTRIES(ENTRIES), .FRAC_W(FRAC_W),
             .IDX_W(IDX_W), .PLEN_W(PLEN_W)) u_tcam (
    .clk, .rst_n,
    .key      (in_mag),
    .hit      (hit),
    .act_dir  (dir),
    .act_amt  (amt),
    .wr_en    (tcam_wr_en),
    .wr_idx   (tcam_wr_idx),
    .wr_valid (tcam_wr_valid),
    .wr_value (tcam_wr_value),
    .wr_plen  (tcam_wr_plen),
    .wr_dir   (tcam_wr_dir),
    .wr_amt   (tcam_wr_amt)
  );

  always_comb begin
    unique case (dir)
      SH_RIGHT: alu_op = ALU_SHR_REG;
      SH_LEFT:  alu_op = ALU_SHL_REG;
      default:  alu_op = ALU_PASS;
    endcase
  end

  fpisa_alu #(.W(MREG_W)) u_alu (
    .op  (alu_op),
    .a   (in_mag),
    .b   (MREG_W'(amt)),
    .imm ('0),
    .y   (mag_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_exp   <= '0;
      out_sign  <= 1'b0;
      out_mag   <= '0;
      out_dir   <= SH_NONE;
      out_amt   <= '0;
      out_zero  <= 1'b1;
      out_ovf   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_exp   <= in_exp;
      out_sign  <= in_sign;
      out_mag   <= mag_d;
      out_dir   <= dir;
      out_amt   <= amt;
      out_zero  <= !hit;
      out_ovf   <= in_ovf;
    end
  end

endmodule
