// tb_fpisa_groupby_sum: in-switch hash-based group-by aggregation of an FP32
// column, at the top's default parameters (one lane, 256 slots).
//
// A generated table of 3000 rows has a group key (64 groups) and a price-like
// value between 1.00 and 100000.00 with two decimals, stored as FP32. Each row
// becomes one ADD packet into the slot its group hashes to (key * 37 mod 256);
// a WRITE of 0.0 first clears every used slot and a READ per group returns the
// sums. Every output is compared bit for bit with the integer reference model,
// and the final group sums are compared with double-precision sums of the
// same FP32 inputs: with no guard bits the only loss is truncation, so the
// relative error must stay within a few units of 2^-23 per addition.
module tb_fpisa_groupby_sum;
  import fpisa_pkg::*;
  import fpisa_ref_pkg::*;

  localparam int ROWS = 3000, GROUPS = 64, TMD = 3, LAT = 11 + TMD;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_convert = 0;
  fp_op_e in_op = FP_READ;
  logic [7:0] in_slot = '0;
  logic [31:0] in_payload = '0;
  logic ig_valid, ig_tag, eg_valid, eg_tag, out_valid;
  logic [0:0][7:0] ig_exp, eg_exp;
  logic [0:0][31:0] ig_mant, eg_mant;
  logic [0:0] ig_ovf, eg_ovf, out_ovf;
  logic [31:0] out_payload;
  logic tcam_wr_en = 0, tcam_wr_valid = 0;
  logic [4:0] tcam_wr_idx = '0;
  logic [31:0] tcam_wr_value = '0;
  logic [5:0] tcam_wr_plen = '0;
  shift_dir_e tcam_wr_dir = SH_NONE;
  logic [7:0] tcam_wr_amt = '0;

  fpisa_switch dut (.*);
  fpisa_tm_model #(.DELAY(TMD)) tm (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, outputs = 0, n_ovf = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint cyc; logic [31:0] fp; int group; } exp_t;
  exp_t q[$];
  acc_t acc [256];
  real  dsum [GROUPS];
  real  maxrel = 0.0;

  function automatic int slot_of(int g);
    return (g * 37) % 256;
  endfunction

  function automatic real real_of(logic [31:0] f);
    int e;
    real m;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  // FP32 nearest to a real in a normal range (round to nearest via the double layout)
  function automatic logic [31:0] to_fp32(real r);
    logic [63:0] d;
    logic [31:0] f;
    d = $realtobits(r);
    f = {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
    if (d[28]) f = f + 1;
    return f;
  endfunction

  task automatic send(input fp_op_e op, input int group, input logic [31:0] val);
    exp_t e;
    int s;
    s = slot_of(group);
    @(negedge clk);
    in_valid = 1; in_op = op; in_slot = 8'(s); in_payload = val;
    apply(acc[s], int'(op), longint'(val), 8, 23, 32);
    if (acc[s].ovf) n_ovf++;
    e.cyc = cycle;
    e.fp = 32'(normalize(acc[s].e, acc[s].m, 8, 23, 32));
    e.group = (op == FP_READ) ? group : -1;
    q.push_back(e);
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      outputs++;
      checks++;
      if (q.size() == 0) failures++;
      else begin
        e = q.pop_front();
        checks++;
        if (cycle - e.cyc != LAT || out_payload !== e.fp) begin
          failures++;
          if (failures < 10) $display("got %h exp %h", out_payload, e.fp);
        end
        if (e.group >= 0) begin
          real r;
          r = (real_of(out_payload) - dsum[e.group]) / dsum[e.group];
          if (r < 0) r = -r;
          if (r > maxrel) maxrel = r;
        end
      end
    end
  end

  initial begin
    for (int s = 0; s < 256; s++) acc[s] = '{e: 0, m: 0, ovf: 0};
    for (int g = 0; g < GROUPS; g++) dsum[g] = 0.0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int g = 0; g < GROUPS; g++) send(FP_WRITE, g, 32'h0);
    for (int r = 0; r < ROWS; r++) begin
      int g;
      logic [31:0] v;
      g = $urandom_range(0, GROUPS - 1);
      v = to_fp32(real'($urandom_range(100, 10000000)) / 100.0);
      dsum[g] += real_of(v);
      send(FP_ADD, g, v);
    end
    for (int g = 0; g < GROUPS; g++) send(FP_READ, g, 32'h0);
    @(negedge clk) in_valid = 0;
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (q.size() != 0 || outputs != ROWS + 2 * GROUPS) failures++;
    checks++;
    if (n_ovf != 0) failures++;
    // about 47 rows per group, each addition truncates below 2^-23 of the sum
    checks++;
    if (maxrel > 100.0 * (2.0 ** -23)) failures++;
    $display("outputs=%0d max relative error vs double sum = %e", outputs, maxrel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
