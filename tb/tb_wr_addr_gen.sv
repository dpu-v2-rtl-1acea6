// tb_wr_addr_gen: self-checking test of the write-address priority encoder.
// Random and corner-case valid masks (all empty, all full, single hole);
// the address must be the lowest empty register and 'full' must be exact.
module tb_wr_addr_gen;
  localparam int unsigned R = 32, LR = 5;
  logic [R-1:0]  valid;
  logic [LR-1:0] addr;
  logic          full;
  int checks = 0, failures = 0;

  wr_addr_gen #(.R(R)) dut (.valid(valid), .addr(addr), .full(full));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int exp_a;
      if (n == 0) valid = '0;
      else if (n == 1) valid = '1;
      else if (n < 2 + R) valid = ~(R'(1) << (n - 2));
      else valid = $urandom() | $urandom();
      #1;
      exp_a = -1;
      for (int i = 0; i < R; i++) if (exp_a < 0 && valid[i] == 1'b0) exp_a = i;
      checks++;
      if (full !== (exp_a < 0) || (exp_a >= 0 && int'(addr) != exp_a)) begin
        failures++;
        if (failures < 10) $display("FAIL valid=%h addr=%0d full=%0b exp=%0d", valid, addr, full, exp_a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
