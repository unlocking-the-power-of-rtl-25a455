// tb_fpisa_to_unsigned: random signed mantissas, including zero and the most
// negative value; checks sign, magnitude and the one-cycle latency.
module tb_fpisa_to_unsigned;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ovf = 0;
  logic [7:0] in_exp = '0;
  logic [31:0] in_mant = '0;
  logic out_valid, out_sign, out_ovf;
  logic [7:0] out_exp;
  logic [31:0] out_mag;
  int checks = 0, failures = 0;

  fpisa_to_unsigned dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic pv, ps, po; logic [31:0] pmag; logic [7:0] pe;

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
        if (out_sign !== ps || out_mag !== pmag || out_exp !== pe || out_ovf !== po) failures++;
      end
      in_valid = ($urandom_range(0, 5) != 0);
      case (n % 10)
        0: in_mant = 32'h8000_0000;
        1: in_mant = 32'd0;
        default: in_mant = $urandom;
      endcase
      in_exp = 8'($urandom); in_ovf = 1'($urandom);
      pv = in_valid; pe = in_exp; po = in_ovf;
      begin
        longint v;
        v = longint'($signed(in_mant));
        ps = (v < 0);
        pmag = 32'(ps ? -v : v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
