// tb_fpisa_switch_full: the top at its default parameters (one lane, 256
// slots, FP32 in a 32-bit mantissa register) running an in-network gradient
// aggregation round.
//
// Eight workers each send a 256-element gradient vector, one element per
// packet, element i into slot i: the first worker's packets load the slots
// (WRITE), the other seven add (ADD). Gradient values are drawn from [-1, 1]
// with most of them near 0, as gradient vectors typically are. A final READ
// packet per slot returns the aggregated vector. Every output packet (the
// running sum after each addition, and the final reads) is compared bit for
// bit with an independent integer model; the final sums are also compared with
// a double-precision sum, reporting the largest absolute error. The worked
// example 3.0 + 1.0 = 4.0 opens the run. Latency per packet is checked
// (11 cycles plus the traffic-manager delay) and back-to-back issue gives one
// packet per cycle.
module tb_fpisa_switch_full;
  import fpisa_pkg::*;
  import fpisa_ref_pkg::*;

  localparam int SLOTS = 256, WORKERS = 8, TMD = 3, LAT = 11 + TMD;

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

  int checks = 0, failures = 0, outputs = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint cyc; logic [31:0] fp; bit ovf; } exp_t;
  exp_t q[$];
  acc_t acc [SLOTS];
  real  dsum [SLOTS];
  real  maxerr = 0.0;
  int   final_slot [$];
  longint first_out = 0, last_out = 0;
  logic [31:0] example_out = '0;

  function automatic real real_of(logic [31:0] f);
    int e;
    real m;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  task automatic send(input fp_op_e op, input int slot, input logic [31:0] val);
    exp_t e;
    @(negedge clk);
    in_valid = 1; in_op = op; in_slot = 8'(slot); in_payload = val; in_convert = 0;
    apply(acc[slot], int'(op), longint'(val), 8, 23, 32);
    e.cyc = cycle;
    e.fp  = 32'(normalize(acc[slot].e, acc[slot].m, 8, 23, 32));
    e.ovf = (op == FP_ADD || op == FP_SUB) && acc[slot].ovf;
    q.push_back(e);
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      outputs++;
      if (outputs == 3) first_out = cycle;   // first packet of the round
      last_out = cycle;
      if (outputs == 2) example_out = out_payload;
      checks++;
      if (q.size() == 0) failures++;
      else begin
        e = q.pop_front();
        checks++;
        if (cycle - e.cyc != LAT || out_payload !== e.fp || out_ovf[0] !== e.ovf) begin
          failures++;
          if (failures < 10) $display("got %h exp %h (latency %0d)", out_payload, e.fp, cycle - e.cyc);
        end
        if (outputs > 2 + WORKERS * SLOTS) begin
          int s;
          real err;
          s = final_slot.pop_front();
          err = real_of(out_payload) - dsum[s];
          if (err < 0) err = -err;
          if (err > maxerr) maxerr = err;
        end
      end
    end
  end

  // gradient-like value in [-1, 1], mostly close to 0
  function automatic logic [31:0] grad();
    return {1'($urandom), 8'($urandom_range(110, 126)), 23'($urandom)};
  endfunction

  initial begin
    for (int s = 0; s < SLOTS; s++) begin acc[s] = '{e: 0, m: 0, ovf: 0}; dsum[s] = 0.0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // worked example in slot 0: 3.0 + 1.0 = 4.0
    send(FP_WRITE, 0, 32'h4040_0000);
    send(FP_ADD,   0, 32'h3F80_0000);
    @(negedge clk) in_valid = 0;
    repeat (LAT + 1) @(negedge clk);
    checks++;
    if (example_out !== 32'h4080_0000) begin
      failures++;
      $display("3.0 + 1.0 gave %h", example_out);
    end

    // aggregation round, back to back
    for (int w = 0; w < WORKERS; w++)
      for (int s = 0; s < SLOTS; s++) begin
        logic [31:0] g;
        g = grad();
        send(w == 0 ? FP_WRITE : FP_ADD, s, g);
        dsum[s] = (w == 0) ? real_of(g) : dsum[s] + real_of(g);
      end
    for (int s = 0; s < SLOTS; s++) final_slot.push_back(s);
    for (int s = 0; s < SLOTS; s++) send(FP_READ, s, 32'h0);
    @(negedge clk) in_valid = 0;
    repeat (LAT + 5) @(negedge clk);

    checks++;
    if (q.size() != 0 || outputs != 2 + (WORKERS + 1) * SLOTS) failures++;
    // back-to-back packets leave one per cycle
    checks++;
    if (last_out - first_out + 1 != longint'((WORKERS + 1) * SLOTS)) failures++;
    // aggregated values close to the double sum (truncation, no guard bits)
    checks++;
    if (maxerr > 1.0e-5) failures++;
    $display("outputs=%0d max |error| vs double sum = %e", outputs, maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
