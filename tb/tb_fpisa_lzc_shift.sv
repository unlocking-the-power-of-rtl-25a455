// tb_fpisa_lzc_shift: random magnitudes with the leading one anywhere (and
// zero); checks that the output has its leading one at bit 23, the reported
// shift, the zero flag, and the one-cycle latency. Counts left, right and
// no-shift cases and fails if one never occurred.
module tb_fpisa_lzc_shift;
  import fpisa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sign = 0, in_ovf = 0;
  logic [7:0] in_exp = '0;
  logic [31:0] in_mag = '0;
  logic out_valid, out_sign, out_zero, out_ovf;
  logic [7:0] out_exp, out_amt;
  logic [31:0] out_mag;
  shift_dir_e out_dir;
  logic tcam_wr_en = 0, tcam_wr_valid = 0;
  logic [4:0] tcam_wr_idx = '0;
  logic [31:0] tcam_wr_value = '0;
  logic [5:0] tcam_wr_plen = '0;
  shift_dir_e tcam_wr_dir = SH_NONE;
  logic [7:0] tcam_wr_amt = '0;
  int checks = 0, failures = 0;
  int n_l = 0, n_r = 0, n_0 = 0, n_z = 0;

  fpisa_lzc_shift dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic pv, pz; logic [31:0] pm; shift_dir_e pd; int pa;

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
        if (out_zero !== pz || (!pz && (out_mag !== pm || out_dir !== pd || out_amt !== 8'(pa)))) begin
          failures++;
          if (failures < 10) $display("got %h %0d %0d exp %h %0d %0d", out_mag, out_dir, out_amt, pm, pd, pa);
        end
      end
      in_valid = ($urandom_range(0, 5) != 0);
      in_mag   = (n % 17 == 0) ? 32'd0 : ($urandom >> $urandom_range(1, 31));
      in_exp   = 8'($urandom);
      pv = in_valid;
      begin
        int lead;
        lead = -1;
        for (int i = 0; i < 31; i++) if (in_mag[i]) lead = i;
        pz = (lead < 0);
        if (lead > 23)      begin pd = SH_RIGHT; pa = lead - 23; pm = in_mag >> pa; end
        else if (lead >= 0 && lead < 23) begin pd = SH_LEFT; pa = 23 - lead; pm = in_mag << pa; end
        else                begin pd = SH_NONE; pa = 0; pm = in_mag; end
        if (in_valid) begin
          if (pz) n_z++;
          else if (pd == SH_LEFT) n_l++;
          else if (pd == SH_RIGHT) n_r++;
          else n_0++;
        end
      end
    end
    checks++;
    if (n_l == 0 || n_r == 0 || n_0 == 0 || n_z == 0) failures++;
    $display("left=%0d right=%0d none=%0d zero=%0d", n_l, n_r, n_0, n_z);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
