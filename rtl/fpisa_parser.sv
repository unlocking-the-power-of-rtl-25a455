// fpisa_parser: payload extraction with in-parser byte-order conversion.
//
// Hosts are little-endian, the switch works in network (big-endian) order.
// Instead of having end hosts swap every payload word, a header can be marked
// for conversion (the proposed @convert_endianness annotation); the parser then
// reverses the bytes of every ELEM_W-bit element as it stores it into metadata,
// and records the fact in a tag bit that travels with the packet so the
// deparser can restore the host's order. The conversion and the tag bit follow
// the paper. The programmable parse graph itself is not modelled: the payload
// arrives already located, element i in bits [i*ELEM_W +: ELEM_W], and the
// single register stage is this design's choice.
//
// Interface: in_valid/in_op/in_slot are packet metadata passed along;
// in_convert says the header carries the annotation. Timing: 1 cycle.
module fpisa_parser
  import fpisa_pkg::*;
#(
  parameter int unsigned LANES  = 1,
  parameter int unsigned ELEM_W = 32,
  parameter int unsigned SLOT_W = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  fp_op_e                        in_op,
  input  logic [SLOT_W-1:0]             in_slot,
  input  logic                          in_convert,
  input  logic [LANES*ELEM_W-1:0]       in_payload,
  output logic                          out_valid,
  output fp_op_e                        out_op,
  output logic [SLOT_W-1:0]             out_slot,
  output logic                          out_tag,
  output logic [LANES-1:0][ELEM_W-1:0]  out_elem
);

  localparam int unsigned NB = ELEM_W / 8;

  function automatic logic [ELEM_W-1:0] byte_rev(input logic [ELEM_W-1:0] v);
    logic [ELEM_W-1:0] r;
    for (int unsigned k = 0; k < NB; k++)
      r[k*8 +: 8] = v[(NB-1-k)*8 +: 8];
    return r;
  endfunction

  logic [LANES-1:0][ELEM_W-1:0] elem_d;

  always_comb begin
    for (int unsigned i = 0; i < LANES; i++)
      elem_d[i] = in_convert ? byte_rev(in_payload[i*ELEM_W +: ELEM_W])
                             : in_payload[i*ELEM_W +: ELEM_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_op    <= FP_READ;
      out_slot  <= '0;
      out_tag   <= 1'b0;
      out_elem  <= '0;
    end else begin
      out_valid <= in_valid;
      out_op    <= in_op;
      out_slot  <= in_slot;
      out_tag   <= in_convert;
      out_elem  <= elem_d;
    end
  end

  initial assert (ELEM_W % 8 == 0) else $error("ELEM_W must be whole bytes");

endmodule
