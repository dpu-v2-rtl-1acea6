// instr_mem: the instruction memory.
//
// DEPTH rows of IL bits, IL being the length of the longest instruction, so
// that one row read per cycle always keeps the fetch unit supplied.
// Instructions are packed densely across rows, without gaps, by the program
// loader. One synchronous read port (data one cycle after the address) and
// one write port for loading a program. The width rule is the paper's; the
// depth and the port arrangement are this design's choices. In silicon this
// is an SRAM macro; here it is an array.
module instr_mem
  import dpu_pkg::*;
#(
  parameter int unsigned IL    = instr_len_max(D_DEF, B_DEF, R_DEF, clog2i(DMEM_DEPTH_DEF)),
  parameter int unsigned DEPTH = IMEM_DEPTH_DEF,
  localparam int unsigned LA = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [LA-1:0] raddr,
  output logic [IL-1:0] rdata,
  input  logic          we,
  input  logic [LA-1:0] waddr,
  input  logic [IL-1:0] wdata
);

  logic [IL-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
