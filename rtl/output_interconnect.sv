// output_interconnect: connects PE results to register-bank write ports.
//
// This is the "one bank - one PE per layer" topology the paper selects: bank
// k of a tree (k = 0 .. 2^D - 1) can receive the result of exactly one PE in
// each layer l, namely PE k >> (l + 1) of that layer, through a D:1
// multiplexer. The root therefore reaches all 2^D banks of its tree, and a
// leaf PE reaches two. sel[j] is the layer whose result bank j takes; values
// of sel above D-1 select layer D-1. Purely combinational.
module output_interconnect
  import dpu_pkg::*;
#(
  parameter int unsigned W = W_DEF,
  parameter int unsigned D = D_DEF,
  parameter int unsigned B = B_DEF,
  localparam int unsigned NIN  = 2 ** D,
  localparam int unsigned T    = B / NIN,
  localparam int unsigned NPE  = NIN - 1,
  localparam int unsigned LSEL = (D > 1) ? $clog2(D) : 1
) (
  input  logic [W-1:0]    pe_y [T][NPE],   // aligned PE results of each tree
  input  logic [LSEL-1:0] sel  [B],
  output logic [W-1:0]    out  [B]
);

  always_comb begin
    for (int j = 0; j < B; j++) begin
      automatic int unsigned t = j / NIN;
      automatic int unsigned k = j % NIN;
      automatic int unsigned l = (int'(sel[j]) >= D) ? D - 1 : int'(sel[j]);
      out[j] = pe_y[t][(NIN - (NIN >> l)) + (k >> (l + 1))];
    end
  end

endmodule
