// data_mem: the on-chip data memory.
//
// DEPTH rows of B words of W bits. The register banks load and store whole
// rows at a single address, with a per-word enable mask: word j of a row
// always corresponds to register bank j. One synchronous read port (data one
// cycle after the address) and one write port with a per-word mask, usable
// in the same cycle; a read of a row written in the same cycle returns the
// old contents. The paper gives the width (B words) and the word mask; the
// depth, the separate read and write ports and the read latency are this
// design's choices. In silicon this is an SRAM macro; here it is an array.
module data_mem #(
  parameter int unsigned W     = 32,
  parameter int unsigned B     = 64,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned LA = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [LA-1:0] raddr,
  output logic [W-1:0]  rdata [B],
  input  logic          we,
  input  logic [LA-1:0] waddr,
  input  logic [B-1:0]  wmask,
  input  logic [W-1:0]  wdata [B]
);

  logic [B*W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) begin
      for (int j = 0; j < B; j++) rdata[j] <= mem[raddr][j*W +: W];
    end
    if (we) begin
      for (int j = 0; j < B; j++)
        if (wmask[j]) mem[waddr][j*W +: W] <= wdata[j];
    end
  end

endmodule
