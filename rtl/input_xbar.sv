// input_xbar: the input interconnect, a full B x B crossbar.
//
// Each of the B outputs (one per tree input) is a B:1 multiplexer that picks
// any register-bank read port, chosen by a per-output select field of the
// instruction. Several outputs may select the same bank, which broadcasts one
// register to several PEs. The same crossbar also routes data for copy_4
// (output j feeds bank j's copy path) and for stores. Purely combinational;
// the pipeline register that follows it lives in the top level. The crossbar
// and its B:1 multiplexers are as drawn in the paper.
module input_xbar
  import dpu_pkg::*;
#(
  parameter int unsigned W = W_DEF,
  parameter int unsigned B = B_DEF,
  localparam int unsigned LB = $clog2(B)
) (
  input  logic [W-1:0]  in_data [B],
  input  logic [LB-1:0] sel     [B],
  output logic [W-1:0]  out_data[B]
);

  always_comb begin
    for (int j = 0; j < B; j++) out_data[j] = in_data[sel[j]];
  end

endmodule
