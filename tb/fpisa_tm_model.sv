// fpisa_tm_model: behavioural stand-in for the traffic manager.
//
// Behavioural model, not part of the design. A real traffic manager queues
// packets between the ingress and egress pipelines; here every packet's
// ingress metadata simply reappears at the egress side DELAY cycles later, in
// order, which is all the FPISA egress stages need.
module fpisa_tm_model #(
  parameter int unsigned DELAY  = 3,
  parameter int unsigned LANES  = 1,
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned MREG_W = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          ig_valid,
  input  logic                          ig_tag,
  input  logic [LANES-1:0][EXP_W-1:0]   ig_exp,
  input  logic [LANES-1:0][MREG_W-1:0]  ig_mant,
  input  logic [LANES-1:0]              ig_ovf,
  output logic                          eg_valid,
  output logic                          eg_tag,
  output logic [LANES-1:0][EXP_W-1:0]   eg_exp,
  output logic [LANES-1:0][MREG_W-1:0]  eg_mant,
  output logic [LANES-1:0]              eg_ovf
);

  typedef struct packed {
    logic                          valid;
    logic                          tag;
    logic [LANES-1:0][EXP_W-1:0]   exp;
    logic [LANES-1:0][MREG_W-1:0]  mant;
    logic [LANES-1:0]              ovf;
  } meta_t;

  meta_t line [DELAY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DELAY; i++) line[i] <= '0;
    end else begin
      line[0] <= '{ig_valid, ig_tag, ig_exp, ig_mant, ig_ovf};
      for (int i = 1; i < DELAY; i++) line[i] <= line[i-1];
    end
  end

  assign eg_valid = line[DELAY-1].valid;
  assign eg_tag   = line[DELAY-1].tag;
  assign eg_exp   = line[DELAY-1].exp;
  assign eg_mant  = line[DELAY-1].mant;
  assign eg_ovf   = line[DELAY-1].ovf;

endmodule
