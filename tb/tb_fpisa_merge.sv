// tb_fpisa_merge: random normalized mantissas with exponents inside and
// outside the normal range; checks the packed word (normal, flush to zero,
// infinity, zero flag) and the one-cycle latency.
module tb_fpisa_merge;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sign = 0, in_zero = 0, in_ovf = 0;
  logic signed [9:0] in_exp = '0;
  logic [31:0] in_mag = '0;
  logic out_valid, out_ovf;
  logic [31:0] out_fp;
  int checks = 0, failures = 0;

  fpisa_merge dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic pv, po; logic [31:0] pf;

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
        if (out_fp !== pf || out_ovf !== po) begin
          failures++;
          if (failures < 10) $display("got %h exp %h", out_fp, pf);
        end
      end
      in_valid = ($urandom_range(0, 5) != 0);
      in_exp   = 10'($signed($urandom_range(0, 300)) - 20);
      in_sign  = 1'($urandom);
      in_zero  = ($urandom_range(0, 9) == 0);
      in_mag   = {8'd0, 1'b1, 23'($urandom)};
      in_ovf   = 1'($urandom);
      pv = in_valid; po = in_ovf;
      if (in_zero || int'(in_exp) <= 0) pf = {in_sign, 31'd0};
      else if (int'(in_exp) >= 255)     pf = {in_sign, 8'hFF, 23'd0};
      else                              pf = {in_sign, 8'(in_exp), in_mag[22:0]};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
