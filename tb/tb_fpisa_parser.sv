// tb_fpisa_parser: random payloads with and without byte-order conversion;
// checks element values, the tag bit, valid and the one-cycle latency.
module tb_fpisa_parser;
  import fpisa_pkg::*;
  localparam int LANES = 3, EW = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_convert = 0;
  fp_op_e in_op = FP_ADD;
  logic [7:0] in_slot = '0;
  logic [LANES*EW-1:0] in_payload = '0;
  logic out_valid, out_tag;
  fp_op_e out_op;
  logic [7:0] out_slot;
  logic [LANES-1:0][EW-1:0] out_elem;
  int checks = 0, failures = 0;

  fpisa_parser #(.LANES(LANES), .ELEM_W(EW), .SLOT_W(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic pv, pc;
  logic [7:0] ps;
  logic [LANES*EW-1:0] pp;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    pv = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      if (n > 0) begin
        checks++;
        if (out_valid !== pv) failures++;
        if (pv) begin
          checks++;
          if (out_tag !== pc || out_slot !== ps) failures++;
          for (int i = 0; i < LANES; i++) begin
            logic [EW-1:0] w, e;
            w = pp[i*EW +: EW];
            e = pc ? {w[7:0], w[15:8], w[23:16], w[31:24]} : w;
            checks++;
            if (out_elem[i] !== e) begin
              failures++;
              $display("lane %0d got %h exp %h", i, out_elem[i], e);
            end
          end
        end
      end
      in_valid   = ($urandom_range(0, 3) != 0);
      in_convert = $urandom_range(0, 1);
      in_slot    = 8'($urandom);
      for (int i = 0; i < LANES; i++) in_payload[i*EW +: EW] = $urandom;
      pv = in_valid; pc = in_convert; ps = in_slot; pp = in_payload;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
