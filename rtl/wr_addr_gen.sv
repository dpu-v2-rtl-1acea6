// wr_addr_gen: write-address generator of one register bank.
//
// A priority encoder over the bank's valid bits: it returns the lowest
// register address whose valid bit is 0, which is where the bank's next
// incoming word is written. 'full' is raised when every register holds valid
// data. This is the automatic write policy of the paper (write to the empty
// location with the lowest address); it lets instructions omit write
// addresses, since the compiler can predict the choice. Combinational.
module wr_addr_gen #(
  parameter int unsigned R = 32,
  localparam int unsigned LR = $clog2(R)
) (
  input  logic [R-1:0]  valid,
  output logic [LR-1:0] addr,
  output logic          full
);

  always_comb begin
    addr = '0;
    full = 1'b1;
    for (int i = R - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        addr = LR'(i);
        full = 1'b0;
      end
    end
  end

endmodule
