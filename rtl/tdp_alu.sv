// tdp_alu: arithmetic unit of a processing element.
//
// Holds the PE's two floating-point units, one in add mode and one in
// multiply mode, as the paper describes. A fired node presents its opcode,
// both operands and its graph-memory address (the tag) with in_valid; the
// unit selected by the opcode computes the result and, one cycle later, the
// result appears with out_valid and the same tag, so the PE knows where to
// write it back. Only one node fires per cycle, so a single tag register
// serves both units. The tag pass-through and the valid handshake are this
// design's own choices.
module tdp_alu
  import tdp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  opcode_e           op,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic [NODE_W-1:0] in_tag,
  output logic              out_valid,
  output logic [DATA_W-1:0] result,
  output logic [NODE_W-1:0] out_tag
);

  logic              add_v, mul_v;
  logic [DATA_W-1:0] add_y, mul_y;

  fp_add u_add (.clk, .rst_n, .in_valid(in_valid && op == OP_ADD), .a, .b,
                .out_valid(add_v), .y(add_y));
  fp_mul u_mul (.clk, .rst_n, .in_valid(in_valid && op == OP_MUL), .a, .b,
                .out_valid(mul_v), .y(mul_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_tag <= '0;
    else if (in_valid) out_tag <= in_tag;
  end

  assign out_valid = add_v || mul_v;
  assign result    = mul_v ? mul_y : add_y;

endmodule
