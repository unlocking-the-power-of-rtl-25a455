// tb_lpm_tcam: checks the reset contents against the rows of the paper's
// table (64.0.0.0/2 right 7, 1.0.0.0/8 right 1, 0.128.0.0/9 none, 0.64.0.0/10
// left 1, 0.0.0.1/32 left 23, zero -> default), random keys against a
// leading-one model, and control-plane writes: a new entry for bit 31, and a
// short prefix that only wins where no longer prefix matches.
module tb_lpm_tcam;
  import fpisa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] key = '0;
  logic hit;
  shift_dir_e act_dir;
  logic [7:0] act_amt;
  logic wr_en = 0, wr_valid = 0;
  logic [4:0] wr_idx = '0;
  logic [31:0] wr_value = '0;
  logic [5:0] wr_plen = '0;
  shift_dir_e wr_dir = SH_NONE;
  logic [7:0] wr_amt = '0;
  int checks = 0, failures = 0;

  lpm_tcam dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_act(input logic [31:0] k, input logic h, input shift_dir_e d,
                            input int a);
    key = k; #1;
    checks++;
    if (hit !== h || (h && (act_dir !== d || act_amt !== 8'(a)))) begin
      failures++;
      $display("key %h: got hit=%b dir=%0d amt=%0d, exp hit=%b dir=%0d amt=%0d",
               k, hit, act_dir, act_amt, h, d, a);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // Rows printed in the paper's table.
    expect_act(32'h4000_0000, 1, SH_RIGHT, 7);   // 64.0.0.0/2
    expect_act(32'h0100_0000, 1, SH_RIGHT, 1);   // 1.0.0.0/8
    expect_act(32'h0080_0000, 1, SH_NONE, 0);    // 0.128.0.0/9
    expect_act(32'h0040_0000, 1, SH_LEFT, 1);    // 0.64.0.0/10
    expect_act(32'h0000_0001, 1, SH_LEFT, 23);   // 0.0.0.1/32
    expect_act(32'h0000_0000, 0, SH_NONE, 0);    // default
    expect_act(32'h8000_0000, 0, SH_NONE, 0);    // no entry for bit 31
    expect_act(32'h0100_0000, 1, SH_RIGHT, 1);   // worked example: 0b10.0 x 2^1
    // Random keys: the leading one decides.
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] k; int lead;
      k = $urandom >> $urandom_range(1, 31);
      lead = -1;
      for (int i = 0; i < 31; i++) if (k[i]) lead = i;
      if (lead < 0) expect_act(k, 0, SH_NONE, 0);
      else if (lead > 23) expect_act(k, 1, SH_RIGHT, lead - 23);
      else if (lead < 23) expect_act(k, 1, SH_LEFT, 23 - lead);
      else expect_act(k, 1, SH_NONE, 0);
    end
    // Control plane: add an entry for bit 31 (128.0.0.0/1).
    @(negedge clk);
    wr_en = 1; wr_idx = 31; wr_valid = 1; wr_value = 32'h8000_0000; wr_plen = 1;
    wr_dir = SH_RIGHT; wr_amt = 8;
    @(negedge clk); wr_en = 0;
    expect_act(32'h8000_0000, 1, SH_RIGHT, 8);
    expect_act(32'h4000_0000, 1, SH_RIGHT, 7);
    // Replace entry 0 (0.0.0.1/32) by 0.0.0.0/24 -> left 5. Keys whose
    // leading one lies in bits 1..7 still hit their own longer prefix.
    @(negedge clk);
    wr_en = 1; wr_idx = 0; wr_valid = 1; wr_value = 32'h0; wr_plen = 24;
    wr_dir = SH_LEFT; wr_amt = 5;
    @(negedge clk); wr_en = 0;
    expect_act(32'h0000_0001, 1, SH_LEFT, 5);
    expect_act(32'h0000_0002, 1, SH_LEFT, 22);
    expect_act(32'h0000_0000, 1, SH_LEFT, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
