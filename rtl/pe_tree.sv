// pe_tree: one tree of processing elements, D layers deep.
//
// Layer 0 has 2^(D-1) PEs fed by the 2^D tree inputs (PE i takes inputs 2i
// and 2i+1); layer l PE i takes the registered results of layer l-1 PEs 2i
// and 2i+1, so the single PE of layer D-1 is the root. Every PE output is
// registered, giving D pipeline stages, as in the paper. Intermediate results
// are thus consumed in the next layer without passing through the register
// file.
//
// PEs are numbered layer by layer: layer l starts at index 2^D - 2^(D-l).
// op[p] must hold the operation of PE p for the instruction whose data is in
// PE p's layer in that cycle: layer l works l cycles after the tree inputs are
// presented (the control pipeline provides that alignment).
//
// Results of the lower layers are delayed by further registers (D-1-l for
// layer l) so that y[] presents all 2^D - 1 results of one instruction in the
// same cycle, D cycles after its inputs; the output interconnect then picks
// from them. In the paper's figure these are the lines of lower-layer PEs
// that cross the upper pipeline registers on their way to the output
// interconnect.
module pe_tree
  import dpu_pkg::*;
#(
  parameter int unsigned W = W_DEF,
  parameter int unsigned D = D_DEF,
  localparam int unsigned NIN = 2 ** D,
  localparam int unsigned NPE = NIN - 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in_data [NIN],
  input  pe_op_e       op      [NPE],
  output logic [W-1:0] y       [NPE]
);

  // Index of the first PE of layer l.
  function automatic int unsigned layer_base(int unsigned l);
    return NIN - (NIN >> l);
  endfunction

  logic [W-1:0] pe_a [NPE];
  logic [W-1:0] pe_b [NPE];
  logic [W-1:0] pe_y [NPE];
  logic [W-1:0] res  [NPE];   // PE output registers

  for (genvar l = 0; l < D; l++) begin : g_layer
    localparam int unsigned NL = NIN >> (l + 1);
    for (genvar i = 0; i < NL; i++) begin : g_pe
      localparam int unsigned P = layer_base(l) + i;
      if (l == 0) begin : g_leaf
        assign pe_a[P] = in_data[2*i];
        assign pe_b[P] = in_data[2*i+1];
      end else begin : g_inner
        assign pe_a[P] = res[layer_base(l-1) + 2*i];
        assign pe_b[P] = res[layer_base(l-1) + 2*i + 1];
      end

      pe #(.W(W)) u_pe (.op(op[P]), .a(pe_a[P]), .b(pe_b[P]), .y(pe_y[P]));

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) res[P] <= '0;
        else        res[P] <= pe_y[P];
      end

      // Align the result with the root's.
      pipe_delay #(.WIDTH(W), .DEPTH(D - 1 - l)) u_align (
        .clk(clk), .rst_n(rst_n), .d(res[P]), .q(y[P])
      );
    end
  end

endmodule
