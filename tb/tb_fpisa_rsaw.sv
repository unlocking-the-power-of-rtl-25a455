// tb_fpisa_rsaw: random read-shift-add-write streams on a few slots,
// back-to-back, against a 64-bit integer model of the mantissa array; includes
// long same-sign runs that overflow the register, and counts that overflow was
// flagged. Checks the one-cycle latency.
module tb_fpisa_rsaw;
  import fpisa_pkg::*;
  import fpisa_ref_pkg::*;
  localparam int SLOTS = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sign = 0;
  fp_op_e in_op = FP_ADD;
  logic [1:0] in_slot = '0;
  logic [7:0] in_exp = '0, in_mem_shift = '0;
  logic [31:0] in_mant = '0;
  logic out_valid, out_ovf;
  fp_op_e out_op;
  logic [1:0] out_slot;
  logic [7:0] out_exp;
  logic [31:0] out_mant;
  int checks = 0, failures = 0, n_ovf = 0, n_shift = 0;

  fpisa_rsaw #(.SLOTS(SLOTS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint model [SLOTS];
  logic pv, povf; longint pm;

  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    pv = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== pv) failures++;
      if (pv) begin
        checks++;
        if (out_mant !== 32'(pm) || out_ovf !== povf) begin
          failures++;
          if (failures < 10) $display("n=%0d got %h/%b exp %h/%b", n, out_mant, out_ovf, 32'(pm), povf);
        end
        if (povf) n_ovf++;
      end
      in_valid = ($urandom_range(0, 7) != 0);
      in_slot  = 2'($urandom);
      if ((n / 500) % 2 == 1) begin
        // saturation phase: large same-sign additions, no shifts
        in_op = FP_ADD; in_sign = 0; in_mem_shift = 0; in_slot = 0;
        in_mant = {8'd0, 24'hFFFFFF};
      end else begin
        in_op        = fp_op_e'($urandom_range(0, 3));
        in_sign      = 1'($urandom);
        in_mem_shift = ($urandom_range(0, 3) == 0) ? 8'($urandom_range(0, 40)) : 8'd0;
        if (in_op == FP_READ) in_mem_shift = 0;
        in_mant      = 32'($urandom_range(0, 32'h00FFFFFF));
      end
      pv = in_valid; povf = 0; pm = 0;
      if (in_valid) begin
        longint sm, r;
        sm = asr(model[in_slot], int'(in_mem_shift), 32);
        if (in_mem_shift != 0) n_shift++;
        case (in_op)
          FP_ADD, FP_SUB: begin
            r = ((in_sign ^ (in_op == FP_SUB)) != 0) ? sm - longint'(in_mant) : sm + longint'(in_mant);
            povf = (r != wrap(r, 32));
            model[in_slot] = wrap(r, 32);
          end
          FP_WRITE: model[in_slot] = in_sign ? -longint'(in_mant) : longint'(in_mant);
          default: ;
        endcase
        pm = (in_op == FP_READ) ? sm : model[in_slot];
      end
    end
    checks++;
    if (n_ovf == 0 || n_shift == 0) failures++;
    $display("overflows=%0d shifts=%0d", n_ovf, n_shift);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
