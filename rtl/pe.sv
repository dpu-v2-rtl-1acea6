// pe: one processing element of a PE tree.
//
// A PE takes two words and produces either their sum, their product, or one
// of the two inputs unchanged (bypass), as selected by a 2-bit operation code
// from the instruction. The paper specifies the +, x and bypass functions;
// that the arithmetic is W-bit unsigned integer (wrap-around, product
// truncated to W bits) and that either input may be bypassed are this
// design's choices. Purely combinational: the output register belongs to the
// enclosing tree (pe_tree), one register per PE as in the paper.
module pe
  import dpu_pkg::*;
#(
  parameter int unsigned W = W_DEF
) (
  input  pe_op_e         op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [W-1:0]   y
);

  always_comb begin
    unique case (op)
      PE_ADD:   y = a + b;
      PE_MUL:   y = a * b;
      PE_PASSA: y = a;
      PE_PASSB: y = b;
      default:  y = a;
    endcase
  end

endmodule
