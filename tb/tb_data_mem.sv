// tb_data_mem: self-checking test of the data memory.
// Random masked row writes and row reads against a reference array; reads
// return data one cycle after the address, and a read of a row written in
// the same cycle returns the old contents.
module tb_data_mem;
  localparam int unsigned W = 32, B = 8, DEPTH = 16, LA = 4;
  logic clk = 0, re, we;
  logic [LA-1:0] raddr, waddr;
  logic [B-1:0] wmask;
  logic [W-1:0] rdata [B], wdata [B];
  logic [W-1:0] model [DEPTH][B];
  logic [W-1:0] exp_row [B];
  int checks = 0, failures = 0;

  data_mem #(.W(W), .B(B), .DEPTH(DEPTH)) dut (
    .clk(clk), .re(re), .raddr(raddr), .rdata(rdata),
    .we(we), .waddr(waddr), .wmask(wmask), .wdata(wdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; we = 0; raddr = '0; waddr = '0; wmask = '0;
    for (int j = 0; j < B; j++) wdata[j] = '0;
    // fill every row
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = LA'(a); wmask = '1;
      for (int j = 0; j < B; j++) begin wdata[j] = $urandom(); model[a][j] = wdata[j]; end
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      re = ($urandom_range(1) == 1);
      we = ($urandom_range(1) == 1);
      raddr = LA'($urandom_range(DEPTH - 1));
      waddr = (n % 9 == 0) ? raddr : LA'($urandom_range(DEPTH - 1));
      wmask = B'($urandom());
      for (int j = 0; j < B; j++) wdata[j] = $urandom();
      exp_row = model[raddr];
      @(posedge clk);
      if (we) for (int j = 0; j < B; j++) if (wmask[j]) model[waddr][j] = wdata[j];
      #1;
      if (re) for (int j = 0; j < B; j++) begin
        checks++;
        if (rdata[j] !== exp_row[j]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d word %0d got %h exp %h", raddr, j, rdata[j], exp_row[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
