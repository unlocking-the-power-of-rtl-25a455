// tb_fpisa_exp_align: random operation streams on a few slots, back-to-back;
// a model of the exponent array predicts the result exponent and both shift
// distances of every packet; checks the one-cycle latency.
module tb_fpisa_exp_align;
  import fpisa_pkg::*;
  localparam int SLOTS = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sign = 0;
  fp_op_e in_op = FP_ADD;
  logic [1:0] in_slot = '0;
  logic [7:0] in_exp = '0;
  logic [31:0] in_mant = '0;
  logic out_valid, out_sign;
  fp_op_e out_op;
  logic [1:0] out_slot;
  logic [7:0] out_exp, out_meta_shift, out_mem_shift;
  logic [31:0] out_mant;
  int checks = 0, failures = 0;
  int n_meta = 0, n_mem = 0;

  fpisa_exp_align #(.SLOTS(SLOTS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int model [SLOTS];
  logic pv; int pe, pm, pme; logic [31:0] pmant;

  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    pv = 0;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== pv) failures++;
      if (pv) begin
        checks++;
        if (out_exp !== 8'(pe) || out_meta_shift !== 8'(pm) || out_mem_shift !== 8'(pme)
            || out_mant !== pmant) begin
          failures++;
          if (failures < 10)
            $display("n=%0d got e=%0d ms=%0d mm=%0d exp e=%0d ms=%0d mm=%0d", n, out_exp,
                     out_meta_shift, out_mem_shift, pe, pm, pme);
        end
      end
      in_valid = ($urandom_range(0, 5) != 0);
      in_op    = fp_op_e'($urandom_range(0, 3));
      in_slot  = 2'($urandom);
      in_exp   = (n % 2) ? 8'($urandom) : 8'($urandom_range(120, 135));
      in_mant  = $urandom;
      in_sign  = 1'($urandom);
      pv = in_valid; pmant = in_mant;
      pe = model[in_slot]; pm = 0; pme = 0;
      if (in_valid) begin
        case (in_op)
          FP_ADD, FP_SUB:
            if (int'(in_exp) >= model[in_slot]) begin
              pme = int'(in_exp) - model[in_slot]; pe = int'(in_exp);
            end else pm = model[in_slot] - int'(in_exp);
          FP_WRITE: pe = int'(in_exp);
          default: ;
        endcase
        if (pm > 0) n_meta++;
        if (pme > 0) n_mem++;
        model[in_slot] = pe;
      end
    end
    checks++;
    if (n_meta == 0 || n_mem == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
