// fpisa_deparser: payload reassembly with byte-order restoration.
//
// Counterpart of fpisa_parser. Each ELEM_W-bit result element is written back
// into the payload; when the packet's tag bit says the parser converted the
// byte order, the deparser reverses the bytes again so the host receives its
// own order. Tag-driven restoration follows the paper; the payload layout
// (element i in bits [i*ELEM_W +: ELEM_W]) and the one register stage are this
// design's choices.
//
// Interface: in_valid/in_tag/in_elem from the egress pipeline, plus a per-packet
// overflow flag that is passed along. Timing: 1 cycle.
module fpisa_deparser #(
  parameter int unsigned LANES  = 1,
  parameter int unsigned ELEM_W = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_tag,
  input  logic [LANES-1:0][ELEM_W-1:0]  in_elem,
  input  logic [LANES-1:0]              in_ovf,
  output logic                          out_valid,
  output logic [LANES*ELEM_W-1:0]       out_payload,
  output logic [LANES-1:0]              out_ovf
);

  localparam int unsigned NB = ELEM_W / 8;

  function automatic logic [ELEM_W-1:0] byte_rev(input logic [ELEM_W-1:0] v);
    logic [ELEM_W-1:0] r;
    for (int unsigned k = 0; k < NB; k++)
      r[k*8 +: 8] = v[(NB-1-k)*8 +: 8];
    return r;
  endfunction

  logic [LANES*ELEM_W-1:0] payload_d;

  always_comb begin
    for (int unsigned i = 0; i < LANES; i++)
      payload_d[i*ELEM_W +: ELEM_W] = in_tag ? byte_rev(in_elem[i]) : in_elem[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_payload <= '0;
      out_ovf     <= '0;
    end else begin
      out_valid   <= in_valid;
      out_payload <= payload_d;
      out_ovf     <= in_ovf;
    end
  end

endmodule
