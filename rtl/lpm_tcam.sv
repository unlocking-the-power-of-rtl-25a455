// lpm_tcam: longest-prefix-match TCAM used as a leading-zero counter.
//
// Switches have no count-leading-zeros instruction, but they do have TCAM
// longest-prefix-match tables for IP routing. Entry i of this table matches a
// KEY_W-bit key whose top bits down to bit i are 0...01, i.e. value "only bit i
// set" with a prefix length of KEY_W-i. The longest matching prefix is the
// entry of the key's leading 1, and its action data is the shift that moves
// that 1 to bit FRAC_W: right by i-FRAC_W above it, left by FRAC_W-i below it,
// nothing at it. For FP32 in a 32-bit word this is 64.0.0.0/2 -> right 7,
// 1.0.0.0/8 -> right 1, 0.128.0.0/9 -> none, 0.64.0.0/10 -> left 1,
// 0.0.0.1/32 -> left 23, as in the paper's table; bit KEY_W-1 has no entry.
// A key of zero matches nothing and the default action (no shift) applies,
// signalled by hit = 0.
//
// The table is loaded with these entries at reset and every entry can be
// rewritten through the wr_* port, as a control plane would; the write port,
// ENTRIES and the prefix-length priority logic are this design's choices.
//
// Timing: lookup is combinational; a write takes effect on the next cycle.
module lpm_tcam
  import fpisa_pkg::*;
#(
  parameter int unsigned KEY_W   = 32,
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned FRAC_W  = 23,
  parameter int unsigned IDX_W   = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  parameter int unsigned PLEN_W  = $clog2(KEY_W + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // lookup
  input  logic [KEY_W-1:0]      key,
  output logic                  hit,
  output shift_dir_e            act_dir,
  output logic [SH_AMT_W-1:0]   act_amt,
  // control-plane write
  input  logic                  wr_en,
  input  logic [IDX_W-1:0]      wr_idx,
  input  logic                  wr_valid,
  input  logic [KEY_W-1:0]      wr_value,
  input  logic [PLEN_W-1:0]     wr_plen,
  input  shift_dir_e            wr_dir,
  input  logic [SH_AMT_W-1:0]   wr_amt
);

  typedef struct packed {
    logic                 valid;
    logic [KEY_W-1:0]     value;
    logic [PLEN_W-1:0]    plen;
    shift_dir_e           dir;
    logic [SH_AMT_W-1:0]  amt;
  } entry_t;

  entry_t tbl [ENTRIES];

  // Default content of entry i (the formula above).
  function automatic entry_t init_entry(input int unsigned i);
    entry_t e;
    e.valid = (i < KEY_W - 1);
    e.value = KEY_W'(1) << i;
    e.plen  = PLEN_W'(KEY_W - i);
    if (i > FRAC_W) begin
      e.dir = SH_RIGHT;
      e.amt = SH_AMT_W'(i - FRAC_W);
    end else if (i < FRAC_W) begin
      e.dir = SH_LEFT;
      e.amt = SH_AMT_W'(FRAC_W - i);
    end else begin
      e.dir = SH_NONE;
      e.amt = '0;
    end
    return e;
  endfunction

  function automatic logic [KEY_W-1:0] prefix_mask(input logic [PLEN_W-1:0] plen);
    return (plen == 0) ? '0 : ~(KEY_W'({KEY_W{1'b1}}) >> plen);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) tbl[i] <= init_entry(i);
    end else if (wr_en) begin
      tbl[wr_idx] <= '{valid: wr_valid, value: wr_value, plen: wr_plen,
                       dir: wr_dir, amt: wr_amt};
    end
  end

  // Longest matching prefix wins; on a tie the lower index wins.
  always_comb begin
    logic [PLEN_W-1:0] best;
    hit     = 1'b0;
    best    = '0;
    act_dir = SH_NONE;
    act_amt = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (tbl[i].valid &&
          ((key & prefix_mask(tbl[i].plen)) == (tbl[i].value & prefix_mask(tbl[i].plen))) &&
          (!hit || tbl[i].plen > best)) begin
        hit     = 1'b1;
        best    = tbl[i].plen;
        act_dir = tbl[i].dir;
        act_amt = tbl[i].amt;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_en |-> (32'(wr_idx) < ENTRIES && 32'(wr_plen) <= KEY_W))
    else $error("bad TCAM write");

endmodule
