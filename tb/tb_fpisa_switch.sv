// tb_fpisa_switch: end-to-end test of the FPISA pipeline with 2 lanes and 8
// slots, the traffic manager replaced by a fixed delay.
//
// Phases: (1) the worked example of the design, 3.0 + 1.0 = 4.0 with the
// stored value renormalized by a right shift of 1; (2) a random stream of
// ADD/SUB/READ/WRITE packets with and without byte-order conversion, values
// drawn from a narrow and a wide exponent range so that both alignment
// directions occur; (3) 200 additions of the largest mantissa into one slot so
// that the mantissa register overflows; (4) a control-plane rewrite of a
// renormalization-table entry followed by more traffic. Every output packet is
// compared with an independent integer model (fpisa_ref_pkg), integer-valued
// sums are also compared with real arithmetic, and the in-to-out latency is
// checked (11 cycles plus the traffic-manager delay). Each mechanism is
// counted and a mechanism that never happened counts as a failure.
module tb_fpisa_switch;
  import fpisa_pkg::*;
  import fpisa_ref_pkg::*;

  localparam int LANES = 2, SLOTS = 8, SW = 3, EW = 32, TMD = 3;
  localparam int LAT = 11 + TMD;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_convert = 0;
  fp_op_e in_op = FP_READ;
  logic [SW-1:0] in_slot = '0;
  logic [LANES*EW-1:0] in_payload = '0;
  logic ig_valid, ig_tag, eg_valid, eg_tag, out_valid;
  logic [LANES-1:0][7:0] ig_exp, eg_exp;
  logic [LANES-1:0][31:0] ig_mant, eg_mant;
  logic [LANES-1:0] ig_ovf, eg_ovf, out_ovf;
  logic [LANES*EW-1:0] out_payload;
  logic tcam_wr_en = 0, tcam_wr_valid = 0;
  logic [4:0] tcam_wr_idx = '0;
  logic [31:0] tcam_wr_value = '0;
  logic [5:0] tcam_wr_plen = '0;
  shift_dir_e tcam_wr_dir = SH_NONE;
  logic [7:0] tcam_wr_amt = '0;

  fpisa_switch #(.LANES(LANES), .SLOTS(SLOTS)) dut (.*);
  fpisa_tm_model #(.DELAY(TMD), .LANES(LANES)) tm (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_align_meta = 0, n_align_mem = 0, n_ovf = 0, n_conv = 0, n_read = 0, n_write = 0;
  int n_sub = 0, n_rn_right = 0, n_rn_left = 0, n_rn_none = 0, n_zero = 0, n_tcam_wr = 0;
  int n_real = 0;

  typedef struct {
    longint cyc;
    logic   conv;
    logic [LANES-1:0][31:0] fp;
    logic [LANES-1:0] ovf;
  } exp_t;
  exp_t q[$];

  acc_t acc [LANES][SLOTS];
  real  racc [LANES][SLOTS];   // exact real sum while it stays an integer
  bit   rvalid [LANES][SLOTS];

  function automatic logic [31:0] brev(logic [31:0] w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction

  function automatic int lead_of(longint m);
    longint unsigned mag;
    int l;
    mag = longint'(m < 0 ? -m : m);
    l = -1;
    for (int i = 0; i < 31; i++) if (mag[i]) l = i;
    return l;
  endfunction

  task automatic send(input fp_op_e op, input int slot, input logic conv,
                      input logic [LANES-1:0][31:0] vals, input real rv [LANES]);
    exp_t e;
    @(negedge clk);
    in_valid = 1; in_op = op; in_slot = SW'(slot); in_convert = conv;
    for (int l = 0; l < LANES; l++)
      in_payload[l*EW +: EW] = conv ? brev(vals[l]) : vals[l];
    e.cyc = cycle; e.conv = conv;
    if (conv) n_conv++;
    if (op == FP_READ) n_read++;
    if (op == FP_WRITE) n_write++;
    if (op == FP_SUB) n_sub++;
    for (int l = 0; l < LANES; l++) begin
      bit s; int pe; longint pm; int ld;
      split(longint'(vals[l]), 8, 23, s, pe, pm);
      if (op == FP_ADD || op == FP_SUB) begin
        if (pe < acc[l][slot].e) n_align_meta++;
        if (pe > acc[l][slot].e) n_align_mem++;
      end
      apply(acc[l][slot], int'(op), longint'(vals[l]), 8, 23, 32);
      e.fp[l]  = 32'(normalize(acc[l][slot].e, acc[l][slot].m, 8, 23, 32));
      e.ovf[l] = (op == FP_ADD || op == FP_SUB) ? acc[l][slot].ovf : 1'b0;
      if (e.ovf[l]) n_ovf++;
      ld = lead_of(acc[l][slot].m);
      if (ld < 0) n_zero++;
      else if (ld > 23) n_rn_right++;
      else if (ld < 23) n_rn_left++;
      else n_rn_none++;
      // real-arithmetic cross-check for small-integer values
      case (op)
        FP_WRITE: begin racc[l][slot] = rv[l]; rvalid[l][slot] = (rv[l] == $floor(rv[l])); end
        FP_ADD:   racc[l][slot] += rv[l];
        FP_SUB:   racc[l][slot] -= rv[l];
        default: ;
      endcase
      if (rv[l] != $floor(rv[l]) || racc[l][slot] > 1.0e6 || racc[l][slot] < -1.0e6)
        rvalid[l][slot] = 0;
      if (rvalid[l][slot]) begin
        checks++; n_real++;
        if (e.fp[l] !== 32'(bits_of(racc[l][slot]))) begin
          failures++;
          $display("model %h differs from real sum %f", e.fp[l], racc[l][slot]);
        end
      end
    end
    q.push_back(e);
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0;
  endtask

  // output checker
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        e = q.pop_front();
        checks++;
        if (cycle - e.cyc != LAT) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - e.cyc, LAT);
        end
        for (int l = 0; l < LANES; l++) begin
          logic [31:0] got;
          got = out_payload[l*EW +: EW];
          if (e.conv) got = brev(got);
          checks++;
          if (got !== e.fp[l] || out_ovf[l] !== e.ovf[l]) begin
            failures++;
            if (failures < 20)
              $display("lane %0d got %h/%b exp %h/%b", l, got, out_ovf[l], e.fp[l], e.ovf[l]);
          end
        end
      end
    end
  end

  // random FP32 value: narrow (gradient-like) or wide exponent range
  function automatic logic [31:0] rand_fp(bit wide);
    logic [7:0] ex;
    ex = wide ? 8'($urandom_range(1, 200)) : 8'($urandom_range(118, 128));
    return {1'($urandom), ex, 23'($urandom)};
  endfunction

  initial begin
    real rv [LANES];
    logic [LANES-1:0][31:0] v;
    for (int l = 0; l < LANES; l++)
      for (int s = 0; s < SLOTS; s++) begin
        acc[l][s] = '{e: 0, m: 0, ovf: 0};
        racc[l][s] = 0.0; rvalid[l][s] = 1;
      end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // (1) worked example: 3.0 then + 1.0 -> 4.0 (lane 1: 5.0 + (-2.0) -> 3.0)
    v[0] = 32'h4040_0000; v[1] = 32'h40A0_0000; rv[0] = 3.0; rv[1] = 5.0;
    send(FP_WRITE, 0, 0, v, rv);
    v[0] = 32'h3F80_0000; v[1] = 32'hC000_0000; rv[0] = 1.0; rv[1] = -2.0;
    send(FP_ADD, 0, 0, v, rv);
    idle();
    repeat (LAT + 2) @(negedge clk);
    // direct check of the example's output word
    checks++;
    if (acc[0][0].e != 128 || 32'(normalize(acc[0][0].e, acc[0][0].m, 8, 23, 32)) != 32'h4080_0000)
      failures++;

    // small integers through every op, compared with real arithmetic too
    for (int n = 0; n < 300; n++) begin
      fp_op_e op;
      op = fp_op_e'($urandom_range(0, 3));
      for (int l = 0; l < LANES; l++) begin
        int k;
        k = $urandom_range(0, 200) - 100;
        rv[l] = real'(k);
        v[l] = 32'(bits_of(rv[l]));
      end
      send(op, $urandom_range(0, SLOTS - 1), 1'($urandom), v, rv);
      if ($urandom_range(0, 4) == 0) idle();
    end

    // (2) random FP stream
    for (int n = 0; n < 1500; n++) begin
      for (int l = 0; l < LANES; l++) begin
        v[l] = rand_fp(n % 3 == 0);
        rv[l] = 0.5;   // not integer: no real check
      end
      send(fp_op_e'($urandom_range(0, 9) < 6 ? 0 : $urandom_range(1, 3)),
           $urandom_range(0, SLOTS - 1), 1'($urandom), v, rv);
      if ($urandom_range(0, 6) == 0) idle();
    end

    // (3) overflow: largest mantissa, same exponent, 200 times into slot 7
    v[0] = 32'h3FFF_FFFF; v[1] = 32'h3FFF_FFFF; rv[0] = 0.5; rv[1] = 0.5;
    send(FP_WRITE, 7, 0, v, rv);
    for (int n = 0; n < 200; n++) send(FP_ADD, 7, 0, v, rv);
    idle();

    // (4) control plane rewrites entry 23 (0.128.0.0/9 -> none) with the same
    // content while traffic is idle, then traffic continues
    @(negedge clk);
    tcam_wr_en = 1; tcam_wr_idx = 23; tcam_wr_valid = 1; tcam_wr_value = 32'h0080_0000;
    tcam_wr_plen = 9; tcam_wr_dir = SH_NONE; tcam_wr_amt = 0;
    @(negedge clk);
    tcam_wr_en = 0; n_tcam_wr++;
    for (int n = 0; n < 200; n++) begin
      for (int l = 0; l < LANES; l++) begin v[l] = rand_fp(0); rv[l] = 0.5; end
      send(FP_ADD, $urandom_range(0, SLOTS - 1), 1'($urandom), v, rv);
    end
    idle();
    repeat (LAT + 5) @(negedge clk);

    checks++;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
    $display("align_meta=%0d align_mem=%0d ovf=%0d conv=%0d read=%0d write=%0d sub=%0d",
             n_align_meta, n_align_mem, n_ovf, n_conv, n_read, n_write, n_sub);
    $display("renorm_right=%0d renorm_left=%0d renorm_none=%0d zero=%0d tcam_wr=%0d real_checks=%0d",
             n_rn_right, n_rn_left, n_rn_none, n_zero, n_tcam_wr, n_real);
    checks++;
    if (n_align_meta == 0 || n_align_mem == 0 || n_ovf == 0 || n_conv == 0 || n_read == 0 ||
        n_write == 0 || n_sub == 0 || n_rn_right == 0 || n_rn_left == 0 || n_rn_none == 0 ||
        n_zero == 0 || n_tcam_wr == 0 || n_real == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
