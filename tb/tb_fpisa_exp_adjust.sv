// tb_fpisa_exp_adjust: random exponents and shift actions; checks the signed
// adjusted exponent (including results below 1 and above 254) and the
// one-cycle latency.
module tb_fpisa_exp_adjust;
  import fpisa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sign = 0, in_zero = 0, in_ovf = 0;
  logic [7:0] in_exp = '0, in_amt = '0;
  logic [31:0] in_mag = '0;
  shift_dir_e in_dir = SH_NONE;
  logic out_valid, out_sign, out_zero, out_ovf;
  logic signed [9:0] out_exp;
  logic [31:0] out_mag;
  int checks = 0, failures = 0;

  fpisa_exp_adjust dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic pv, ps, pz; int pe; logic [31:0] pm;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    pv = 0;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== pv) failures++;
      if (pv) begin
        checks++;
        if (int'(out_exp) != pe || out_sign !== ps || out_zero !== pz || out_mag !== pm) begin
          failures++;
          if (failures < 10) $display("got %0d exp %0d", out_exp, pe);
        end
      end
      in_valid = ($urandom_range(0, 5) != 0);
      in_exp   = 8'($urandom);
      in_dir   = shift_dir_e'($urandom_range(0, 2));
      in_amt   = 8'($urandom_range(0, 31));
      in_sign  = 1'($urandom); in_zero = 1'($urandom); in_mag = $urandom;
      pv = in_valid; ps = in_sign; pz = in_zero; pm = in_mag;
      case (in_dir)
        SH_RIGHT: pe = int'(in_exp) + int'(in_amt);
        SH_LEFT:  pe = int'(in_exp) - int'(in_amt);
        default:  pe = int'(in_exp);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
