// tb_instr_mem: self-checking test of the instruction memory.
// Writes random rows, then reads them back in random order and checks each
// row one cycle after its address.
module tb_instr_mem;
  localparam int unsigned IL = 100, DEPTH = 32, LA = 5;
  logic clk = 0, we;
  logic [LA-1:0] raddr, waddr;
  logic [IL-1:0] rdata, wdata;
  logic [IL-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  instr_mem #(.IL(IL), .DEPTH(DEPTH)) dut (
    .clk(clk), .raddr(raddr), .rdata(rdata), .we(we), .waddr(waddr), .wdata(wdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; raddr = '0; waddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = LA'(a);
      wdata = {$urandom(), $urandom(), $urandom(), $urandom()};
      model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      raddr = LA'($urandom_range(DEPTH - 1));
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== model[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d", raddr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
