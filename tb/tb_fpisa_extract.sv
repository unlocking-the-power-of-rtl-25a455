// tb_fpisa_extract: random FP32 values (normal, zero, subnormal) through the
// two extract stages; checks sign, effective exponent, explicit mantissa and
// the two-cycle latency.
module tb_fpisa_extract;
  import fpisa_pkg::*;
  import fpisa_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fp_op_e in_op = FP_ADD;
  logic [7:0] in_slot = '0;
  logic [31:0] in_fp = '0;
  logic out_valid, out_sign;
  fp_op_e out_op;
  logic [7:0] out_slot, out_exp;
  logic [31:0] out_mant;
  int checks = 0, failures = 0;

  fpisa_extract dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0] v_h;
  logic [31:0] fp_h [2];
  logic [7:0] sl_h [2];

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    v_h = '0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      // value driven two cycles ago must be at the output now
      checks++;
      if (out_valid !== v_h[1]) failures++;
      if (v_h[1]) begin
        bit s; int e; longint m;
        split(longint'(fp_h[1]), 8, 23, s, e, m);
        checks++;
        if (out_sign !== s || out_exp !== 8'(e) || out_mant !== 32'(m) || out_slot !== sl_h[1]) begin
          failures++;
          $display("fp=%h got s=%b e=%0d m=%h exp s=%b e=%0d m=%h", fp_h[1], out_sign, out_exp, out_mant, s, e, m);
        end
      end
      in_valid = (n < 990) && ($urandom_range(0, 4) != 0);
      case ($urandom_range(0, 4))
        0: in_fp = {1'($urandom), 8'd0, 23'($urandom)};    // subnormal
        1: in_fp = {1'($urandom), 31'd0};                  // zero
        default: in_fp = $urandom;
      endcase
      in_slot = 8'($urandom);
      v_h = {v_h[0], in_valid};
      fp_h[1] = fp_h[0]; fp_h[0] = in_fp;
      sl_h[1] = sl_h[0]; sl_h[0] = in_slot;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
