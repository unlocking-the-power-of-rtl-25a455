// tb_fpisa_meta_shift: random mantissas and distances (0..40) for every
// operation; checks the aligned mantissa and the one-cycle latency.
module tb_fpisa_meta_shift;
  import fpisa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sign = 0;
  fp_op_e in_op = FP_ADD;
  logic [7:0] in_slot = '0, in_exp = '0, in_meta_shift = '0, in_mem_shift = '0;
  logic [31:0] in_mant = '0;
  logic out_valid, out_sign;
  fp_op_e out_op;
  logic [7:0] out_slot, out_exp, out_mem_shift;
  logic [31:0] out_mant;
  int checks = 0, failures = 0;

  fpisa_meta_shift dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic pv; logic [31:0] pm; logic [7:0] pms;

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
        if (out_mant !== pm || out_mem_shift !== pms) begin
          failures++;
          if (failures < 10) $display("got %h exp %h", out_mant, pm);
        end
      end
      in_valid      = ($urandom_range(0, 5) != 0);
      in_op         = fp_op_e'($urandom_range(0, 3));
      in_mant       = {8'd0, 1'b1, 23'($urandom)};
      in_meta_shift = 8'($urandom_range(0, 40));
      in_mem_shift  = 8'($urandom);
      pv = in_valid; pms = in_mem_shift;
      case (in_op)
        FP_ADD, FP_SUB: pm = (in_meta_shift >= 32) ? 32'd0 : 32'(in_mant / (64'd1 << in_meta_shift));
        FP_READ:        pm = 32'd0;
        default:        pm = in_mant;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
