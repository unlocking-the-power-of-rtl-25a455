// fpisa_switch: FPISA floating-point accumulation through a PISA pipeline.
//
// LANES independent FPISA adders share one packet: element i of the payload is
// added into accumulator slot in_slot of lane i. The packet passes
//
//   parser -> MAU0 split -> MAU1 implied 1 -> MAU2 exponent array/align
//          -> MAU3 shift packet mantissa -> MAU4 read-shift-add-write
//   == traffic manager (outside, ports ig_* / eg_*) ==
//   MAU5 to unsigned -> MAU6 LPM leading-one + shift -> MAU7 exponent fix
//          -> MAU8 merge -> deparser
//
// Ingress keeps the state (exponent array in MAU2, signed mantissa array in
// MAU4) and leaves it denormalized; egress renormalizes a copy of the new
// accumulator value that travels in metadata, so every packet comes out with
// the current sum of its slot as an ordinary floating-point number. The stage
// mapping follows the paper's full FPISA design (with the proposed
// metadata-distance shift and read-shift-add-write unit). The traffic manager
// between the two pipelines is not part of this design: the ingress metadata
// leaves on ig_* and egress takes eg_* back. The packet fields (op, slot,
// convert flag), the lane count and one stage per clock are this design's.
//
// Timing: one packet per cycle, no backpressure. in_* to ig_*: 6 cycles
// (parser 1, MAU0-MAU4 5). eg_* to out_*: 5 cycles (MAU5-MAU8 4, deparser 1).
// The TCAM write port (tcam_wr_*) writes the same entry in every lane.
module fpisa_switch
  import fpisa_pkg::*;
#(
  parameter int unsigned LANES  = 1,
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned FRAC_W = 23,
  parameter int unsigned MREG_W = 32,
  parameter int unsigned SLOTS  = 256,
  parameter int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  parameter int unsigned ELEM_W = 1 + EXP_W + FRAC_W,
  parameter int unsigned T_IDX_W  = (MREG_W > 1) ? $clog2(MREG_W) : 1,
  parameter int unsigned T_PLEN_W = $clog2(MREG_W + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // packet in
  input  logic                          in_valid,
  input  fp_op_e                        in_op,
  input  logic [SLOT_W-1:0]             in_slot,
  input  logic                          in_convert,
  input  logic [LANES*ELEM_W-1:0]       in_payload,
  // ingress -> traffic manager
  output logic                          ig_valid,
  output logic                          ig_tag,
  output logic [LANES-1:0][EXP_W-1:0]   ig_exp,
  output logic [LANES-1:0][MREG_W-1:0]  ig_mant,
  output logic [LANES-1:0]              ig_ovf,
  // traffic manager -> egress
  input  logic                          eg_valid,
  input  logic                          eg_tag,
  input  logic [LANES-1:0][EXP_W-1:0]   eg_exp,
  input  logic [LANES-1:0][MREG_W-1:0]  eg_mant,
  input  logic [LANES-1:0]              eg_ovf,
  // packet out
  output logic                          out_valid,
  output logic [LANES*ELEM_W-1:0]       out_payload,
  output logic [LANES-1:0]              out_ovf,
  // control plane: renormalization table
  input  logic                          tcam_wr_en,
  input  logic [T_IDX_W-1:0]            tcam_wr_idx,
  input  logic                          tcam_wr_valid,
  input  logic [MREG_W-1:0]             tcam_wr_value,
  input  logic [T_PLEN_W-1:0]           tcam_wr_plen,
  input  shift_dir_e                    tcam_wr_dir,
  input  logic [SH_AMT_W-1:0]           tcam_wr_amt
);

  localparam int unsigned IG_LAT = 5;  // MAU0..MAU4 after the parser
  localparam int unsigned EG_LAT = 4;  // MAU5..MAU8

  // ---------------- parser ----------------
  logic                         p_valid, p_tag;
  fp_op_e                       p_op;
  logic [SLOT_W-1:0]            p_slot;
  logic [LANES-1:0][ELEM_W-1:0] p_elem;

  fpisa_parser #(.LANES(LANES), .ELEM_W(ELEM_W), .SLOT_W(SLOT_W)) u_parser (
    .clk, .rst_n,
    .in_valid, .in_op, .in_slot, .in_convert, .in_payload,
    .out_valid (p_valid), .out_op (p_op), .out_slot (p_slot),
    .out_tag   (p_tag),   .out_elem (p_elem)
  );

  // The tag bit rides alongside the lanes.
  logic [IG_LAT-1:0] ig_tag_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ig_tag_q <= '0;
    else        ig_tag_q <= {ig_tag_q[IG_LAT-2:0], p_tag};
  end
  assign ig_tag = ig_tag_q[IG_LAT-1];

  logic [EG_LAT-1:0] eg_tag_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) eg_tag_q <= '0;
    else        eg_tag_q <= {eg_tag_q[EG_LAT-2:0], eg_tag};
  end

  logic [LANES-1:0]              ig_valid_l, eg_valid_l;
  logic [LANES-1:0][ELEM_W-1:0]  eg_fp;
  logic [LANES-1:0]              m_ovf;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    // ---------------- ingress ----------------
    logic                 x_valid, x_sign;
    fp_op_e               x_op;
    logic [SLOT_W-1:0]    x_slot;
    logic [EXP_W-1:0]     x_exp;
    logic [MREG_W-1:0]    x_mant;

    fpisa_extract #(.EXP_W(EXP_W), .FRAC_W(FRAC_W), .MREG_W(MREG_W),
                    .SLOT_W(SLOT_W)) u_extract (
      .clk, .rst_n,
      .in_valid (p_valid), .in_op (p_op), .in_slot (p_slot), .in_fp (p_elem[l]),
      .out_valid (x_valid), .out_op (x_op), .out_slot (x_slot),
      .out_sign (x_sign), .out_exp (x_exp), .out_mant (x_mant)
    );

    logic                 a_valid, a_sign;
    fp_op_e               a_op;
    logic [SLOT_W-1:0]    a_slot;
    logic [EXP_W-1:0]     a_exp, a_meta_sh, a_mem_sh;
    logic [MREG_W-1:0]    a_mant;

    fpisa_exp_align #(.EXP_W(EXP_W), .MREG_W(MREG_W), .SLOTS(SLOTS),
                      .SLOT_W(SLOT_W)) u_align (
      .clk, .rst_n,
      .in_valid (x_valid), .in_op (x_op), .in_slot (x_slot), .in_sign (x_sign),
      .in_exp (x_exp), .in_mant (x_mant),
      .out_valid (a_valid), .out_op (a_op), .out_slot (a_slot), .out_sign (a_sign),
      .out_exp (a_exp), .out_mant (a_mant),
      .out_meta_shift (a_meta_sh), .out_mem_shift (a_mem_sh)
    );

    logic                 s_valid, s_sign;
    fp_op_e               s_op;
    logic [SLOT_W-1:0]    s_slot;
    logic [EXP_W-1:0]     s_exp, s_mem_sh;
    logic [MREG_W-1:0]    s_mant;

    fpisa_meta_shift #(.EXP_W(EXP_W), .MREG_W(MREG_W), .SLOT_W(SLOT_W)) u_mshift (
      .clk, .rst_n,
      .in_valid (a_valid), .in_op (a_op), .in_slot (a_slot), .in_sign (a_sign),
      .in_exp (a_exp), .in_mant (a_mant),
      .in_meta_shift (a_meta_sh), .in_mem_shift (a_mem_sh),
      .out_valid (s_valid), .out_op (s_op), .out_slot (s_slot), .out_sign (s_sign),
      .out_exp (s_exp), .out_mant (s_mant), .out_mem_shift (s_mem_sh)
    );

    // op and slot leave MAU4 for a following stage; the egress needs neither
    fp_op_e               r_op;
    logic [SLOT_W-1:0]    r_slot;

    fpisa_rsaw #(.EXP_W(EXP_W), .MREG_W(MREG_W), .SLOTS(SLOTS),
                 .SLOT_W(SLOT_W)) u_rsaw (
      .clk, .rst_n,
      .in_valid (s_valid), .in_op (s_op), .in_slot (s_slot), .in_sign (s_sign),
      .in_exp (s_exp), .in_mant (s_mant), .in_mem_shift (s_mem_sh),
      .out_valid (ig_valid_l[l]), .out_op (r_op), .out_slot (r_slot),
      .out_exp (ig_exp[l]), .out_mant (ig_mant[l]), .out_ovf (ig_ovf[l])
    );

    // ---------------- egress ----------------
    logic                 u_valid, u_sign, u_ovf;
    logic [EXP_W-1:0]     u_exp;
    logic [MREG_W-1:0]    u_mag;

    fpisa_to_unsigned #(.EXP_W(EXP_W), .MREG_W(MREG_W)) u_unsigned (
      .clk, .rst_n,
      .in_valid (eg_valid), .in_exp (eg_exp[l]), .in_mant (eg_mant[l]), .in_ovf (eg_ovf[l]),
      .out_valid (u_valid), .out_exp (u_exp), .out_sign (u_sign), .out_mag (u_mag),
      .out_ovf (u_ovf)
    );

    logic                 n_valid, n_sign, n_zero, n_ovf;
    logic [EXP_W-1:0]     n_exp;
    logic [MREG_W-1:0]    n_mag;
    shift_dir_e           n_dir;
    logic [SH_AMT_W-1:0]  n_amt;

    fpisa_lzc_shift #(.EXP_W(EXP_W), .FRAC_W(FRAC_W), .MREG_W(MREG_W),
                      .ENTRIES(MREG_W), .IDX_W(T_IDX_W), .PLEN_W(T_PLEN_W)) u_lzc (
      .clk, .rst_n,
      .in_valid (u_valid), .in_exp (u_exp), .in_sign (u_sign), .in_mag (u_mag),
      .in_ovf (u_ovf),
      .out_valid (n_valid), .out_exp (n_exp), .out_sign (n_sign), .out_mag (n_mag),
      .out_dir (n_dir), .out_amt (n_amt), .out_zero (n_zero), .out_ovf (n_ovf),
      .tcam_wr_en, .tcam_wr_idx, .tcam_wr_valid, .tcam_wr_value,
      .tcam_wr_plen, .tcam_wr_dir, .tcam_wr_amt
    );

    logic                       j_valid, j_sign, j_zero, j_ovf;
    logic signed [EXP_W+1:0]    j_exp;
    logic [MREG_W-1:0]          j_mag;

    fpisa_exp_adjust #(.EXP_W(EXP_W), .MREG_W(MREG_W)) u_adjust (
      .clk, .rst_n,
      .in_valid (n_valid), .in_exp (n_exp), .in_sign (n_sign), .in_mag (n_mag),
      .in_dir (n_dir), .in_amt (n_amt), .in_zero (n_zero), .in_ovf (n_ovf),
      .out_valid (j_valid), .out_exp (j_exp), .out_sign (j_sign), .out_mag (j_mag),
      .out_zero (j_zero), .out_ovf (j_ovf)
    );

    fpisa_merge #(.EXP_W(EXP_W), .FRAC_W(FRAC_W), .MREG_W(MREG_W)) u_merge (
      .clk, .rst_n,
      .in_valid (j_valid), .in_exp (j_exp), .in_sign (j_sign), .in_mag (j_mag),
      .in_zero (j_zero), .in_ovf (j_ovf),
      .out_valid (eg_valid_l[l]), .out_fp (eg_fp[l]), .out_ovf (m_ovf[l])
    );
  end : g_lane

  assign ig_valid = ig_valid_l[0];

  // ---------------- deparser ----------------
  fpisa_deparser #(.LANES(LANES), .ELEM_W(ELEM_W)) u_deparser (
    .clk, .rst_n,
    .in_valid (eg_valid_l[0]), .in_tag (eg_tag_q[EG_LAT-1]),
    .in_elem (eg_fp), .in_ovf (m_ovf),
    .out_valid, .out_payload, .out_ovf
  );

endmodule
