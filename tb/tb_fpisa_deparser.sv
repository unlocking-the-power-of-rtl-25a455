// tb_fpisa_deparser: random elements with the tag bit set and clear; checks
// the emitted byte order, the overflow flags and the one-cycle latency.
module tb_fpisa_deparser;
  localparam int LANES = 3, EW = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_tag = 0;
  logic [LANES-1:0][EW-1:0] in_elem = '0;
  logic [LANES-1:0] in_ovf = '0;
  logic out_valid;
  logic [LANES*EW-1:0] out_payload;
  logic [LANES-1:0] out_ovf;
  int checks = 0, failures = 0;

  fpisa_deparser #(.LANES(LANES), .ELEM_W(EW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic pv, pt;
  logic [LANES-1:0][EW-1:0] pe;
  logic [LANES-1:0] po;

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
          if (out_ovf !== po) failures++;
          for (int i = 0; i < LANES; i++) begin
            logic [EW-1:0] w, e;
            w = pe[i];
            e = pt ? {w[7:0], w[15:8], w[23:16], w[31:24]} : w;
            checks++;
            if (out_payload[i*EW +: EW] !== e) failures++;
          end
        end
      end
      in_valid = ($urandom_range(0, 3) != 0);
      in_tag   = $urandom_range(0, 1);
      in_ovf   = LANES'($urandom);
      for (int i = 0; i < LANES; i++) in_elem[i] = $urandom;
      pv = in_valid; pt = in_tag; pe = in_elem; po = in_ovf;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
