// pe_alu: the three-operand ALU of a processing element.
//
// Computes one operation of scgra_pkg::alu_op_e on operands a, b, c (read from
// the data memory in the same cycle) and registers the result in y. OP_NOP
// keeps y, so a result can be picked up by a later control word. The latency
// is one clock: y is valid the cycle after op/a/b/c were presented.
// The ALU as the centre of the PE follows the paper; the operation set and the
// single-cycle latency are this design's own choice.
module pe_alu
  import scgra_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  alu_op_e           op,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic [DATA_W-1:0] c,
  output logic [DATA_W-1:0] y
);

  logic signed [DATA_W-1:0] sa, sb, diff;
  logic        [DATA_W-1:0] prod, y_next;

  assign sa   = a;
  assign sb   = b;
  assign diff = sa - sb;
  assign prod = a * b;

  always_comb begin
    unique case (op)
      OP_NOP:     y_next = y;
      OP_ADD:     y_next = a + b;
      OP_SUB:     y_next = a - b;
      OP_MUL:     y_next = prod;
      OP_MADD:    y_next = prod + c;
      OP_MSUB:    y_next = c - prod;
      OP_ADD3:    y_next = a + b + c;
      OP_ABS:     y_next = sa[DATA_W-1] ? -a : a;
      OP_ABSDIFF: y_next = diff[DATA_W-1] ? -diff : diff;
      OP_SHL:     y_next = a << b[4:0];
      OP_SHR:     y_next = sa >>> b[4:0];
      OP_AND:     y_next = a & b;
      OP_MIN:     y_next = (sa < sb) ? a : b;
      OP_MAX:     y_next = (sa < sb) ? b : a;
      OP_LT:      y_next = {{(DATA_W-1){1'b0}}, sa < sb};
      OP_SEL:     y_next = (a != '0) ? b : c;
      default:    y_next = y;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y <= '0;
    else        y <= y_next;
  end

endmodule
