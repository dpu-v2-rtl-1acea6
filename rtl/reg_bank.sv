// reg_bank: one bank of the shared register file.
//
// R registers of W bits with one read port and one write port, plus a valid
// bit per register that records whether it holds live data.
//
// Read: rd_addr selects the register, combinationally. If the bank writes the
// same register in the same cycle, the incoming word is forwarded to rd_data
// (write-through); with it an instruction may consume the result of an exec
// issued D+1 instructions earlier, the distance the paper's compiler keeps
// between dependent instructions. Forwarding is this design's choice.
//
// Write: the instruction gives no write address. The word goes to the lowest
// register whose valid bit is 0 (wr_addr_gen), and that bit is set. A read
// with rd_rst = 1 is the last use of the register and clears its valid bit
// (the instruction's valid_rst bit). These rules are the paper's. When a
// register is written and released in the same cycle, the release wins; that
// case, like forwarding, is this design's own decision. A write
// into a full bank is dropped and raises 'overflow' for that cycle (a
// compiler error; the paper's compiler spills to avoid it).
//
// clear empties the bank (all valid bits 0); it is asserted when a program
// starts, so that execution begins from the known empty state. All updates
// happen at the rising clock edge.
module reg_bank #(
  parameter int unsigned W = 32,
  parameter int unsigned R = 32,
  localparam int unsigned LR = $clog2(R)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  // read port
  input  logic [LR-1:0] rd_addr,
  input  logic          rd_rst,
  output logic [W-1:0]  rd_data,
  // write port (address chosen by the bank)
  input  logic          we,
  input  logic [W-1:0]  wdata,
  output logic [LR-1:0] wr_addr,
  output logic          overflow,
  output logic [R-1:0]  valid_o
);

  logic [W-1:0] regs [R];
  logic [R-1:0] valid;
  logic         full;
  logic         do_wr;

  wr_addr_gen #(.R(R)) u_wag (.valid(valid), .addr(wr_addr), .full(full));

  assign do_wr    = we && !full;
  assign overflow = we && full;
  assign valid_o  = valid;
  assign rd_data  = (do_wr && wr_addr == rd_addr) ? wdata : regs[rd_addr];

  always_ff @(posedge clk) begin
    if (do_wr) regs[wr_addr] <= wdata;
  end

  logic [R-1:0] valid_nxt;
  always_comb begin
    valid_nxt = valid;
    if (do_wr)  valid_nxt[wr_addr] = 1'b1;
    if (rd_rst) valid_nxt[rd_addr] = 1'b0;
    if (clear)  valid_nxt = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else        valid <= valid_nxt;
  end

endmodule
