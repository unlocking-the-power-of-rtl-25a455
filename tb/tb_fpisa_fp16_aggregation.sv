// tb_fpisa_fp16_aggregation: gradient aggregation in FP16 (1 sign, 5 exponent,
// 10 fraction bits) with four FPISA lanes per packet and a 16-bit mantissa
// register, which leaves 4 bits of headroom (16 worst-case additions).
//
// Eight workers each send a 64-element vector as 16 packets of 4 elements;
// the first worker's packets load the slots, the rest add, then one READ per
// slot returns the sums. Every output is compared bit for bit with the integer
// reference model at the FP16 widths, and the final sums are compared with a
// double-precision sum (error bound: a few units in the last place, since
// alignment and renormalization truncate).
module tb_fpisa_fp16_aggregation;
  import fpisa_pkg::*;
  import fpisa_ref_pkg::*;

  localparam int LANES = 4, SLOTS = 16, SW = 4, EW = 16, TMD = 2, LAT = 11 + TMD;
  localparam int WORKERS = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_convert = 0;
  fp_op_e in_op = FP_READ;
  logic [SW-1:0] in_slot = '0;
  logic [LANES*EW-1:0] in_payload = '0;
  logic ig_valid, ig_tag, eg_valid, eg_tag, out_valid;
  logic [LANES-1:0][4:0] ig_exp, eg_exp;
  logic [LANES-1:0][15:0] ig_mant, eg_mant;
  logic [LANES-1:0] ig_ovf, eg_ovf, out_ovf;
  logic [LANES*EW-1:0] out_payload;
  logic tcam_wr_en = 0, tcam_wr_valid = 0;
  logic [3:0] tcam_wr_idx = '0;
  logic [15:0] tcam_wr_value = '0;
  logic [4:0] tcam_wr_plen = '0;
  shift_dir_e tcam_wr_dir = SH_NONE;
  logic [7:0] tcam_wr_amt = '0;

  fpisa_switch #(.LANES(LANES), .EXP_W(5), .FRAC_W(10), .MREG_W(16), .SLOTS(SLOTS)) dut (.*);
  fpisa_tm_model #(.DELAY(TMD), .LANES(LANES), .EXP_W(5), .MREG_W(16)) tm (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, outputs = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint cyc; logic [LANES-1:0][15:0] fp; bit final_read; int slot; } exp_t;
  exp_t q[$];
  acc_t acc [LANES][SLOTS];
  real  dsum [LANES][SLOTS];
  real  maxrel = 0.0;

  function automatic real real16(logic [15:0] f);
    int e;
    real m;
    e = int'(f[14:10]);
    if (e == 0) return 0.0;
    m = (1.0 + real'(f[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return f[15] ? -m : m;
  endfunction

  task automatic send(input fp_op_e op, input int slot, input logic [LANES-1:0][15:0] v);
    exp_t e;
    @(negedge clk);
    in_valid = 1; in_op = op; in_slot = SW'(slot); in_payload = v;
    e.cyc = cycle; e.final_read = (op == FP_READ); e.slot = slot;
    for (int l = 0; l < LANES; l++) begin
      apply(acc[l][slot], int'(op), longint'(v[l]), 5, 10, 16);
      e.fp[l] = 16'(normalize(acc[l][slot].e, acc[l][slot].m, 5, 10, 16));
    end
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
        if (e.final_read)
          for (int l = 0; l < LANES; l++) begin
            real d, r;
            d = dsum[l][e.slot];
            r = real16(out_payload[l*EW +: EW]) - d;
            if (r < 0) r = -r;
            if (d < 0) d = -d;
            if (d > 1.0e-3 && r / d > maxrel) maxrel = r / d;
          end
      end
    end
  end

  initial begin
    logic [LANES-1:0][15:0] v;
    for (int l = 0; l < LANES; l++)
      for (int s = 0; s < SLOTS; s++) begin acc[l][s] = '{e: 0, m: 0, ovf: 0}; dsum[l][s] = 0.0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int w = 0; w < WORKERS; w++)
      for (int s = 0; s < SLOTS; s++) begin
        for (int l = 0; l < LANES; l++) begin
          v[l] = {1'($urandom), 5'($urandom_range(9, 14)), 10'($urandom)};  // |g| < 1
          dsum[l][s] += real16(v[l]);
        end
        send(w == 0 ? FP_WRITE : FP_ADD, s, v);
      end
    for (int s = 0; s < SLOTS; s++) send(FP_READ, s, '0);
    @(negedge clk) in_valid = 0;
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (q.size() != 0 || outputs != (WORKERS + 1) * SLOTS) failures++;
    // truncating FP16 arithmetic: a few ulp (2^-10) of relative error at most,
    // more where cancellation leaves a small sum
    checks++;
    if (maxrel > 0.05) failures++;
    $display("outputs=%0d max relative error vs double sum = %e", outputs, maxrel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
