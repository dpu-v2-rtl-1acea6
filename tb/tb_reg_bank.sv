// tb_reg_bank: self-checking test of a register bank.
// A reference model keeps the bank's words and valid bits. Random cycles
// write (at the bank-chosen address), read, and release registers; the test
// checks the chosen write address (lowest empty), read data including
// same-cycle write-through, the valid bits, release-wins-over-write,
// overflow on a full bank, and clear.
module tb_reg_bank;
  localparam int unsigned W = 32, R = 8, LR = 3;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [LR-1:0] rd_addr, wr_addr;
  logic rd_rst, we, overflow;
  logic [W-1:0] rd_data, wdata;
  logic [R-1:0] valid_o;
  int checks = 0, failures = 0;
  int n_full = 0, n_fwd = 0;

  logic [W-1:0] m_data [R];
  logic [R-1:0] m_valid;

  reg_bank #(.W(W), .R(R)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .rd_addr(rd_addr), .rd_rst(rd_rst),
    .rd_data(rd_data), .we(we), .wdata(wdata), .wr_addr(wr_addr),
    .overflow(overflow), .valid_o(valid_o));

  always #5 clk = ~clk;

  task automatic check(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s got=%h exp=%h at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_wa;
    logic exp_full;
    logic [W-1:0] exp_rd;
    rd_addr = '0; rd_rst = 0; we = 0; wdata = '0;
    m_valid = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      clear = (n % 1000 == 999);
      we = ($urandom_range(99) < ((n / 250) % 2 ? 70 : 35));
      wdata = $urandom();
      rd_addr = LR'($urandom_range(R - 1));
      rd_rst = ($urandom_range(99) < 40);
      #1;
      exp_wa = -1;
      for (int i = 0; i < R; i++) if (exp_wa < 0 && !m_valid[i]) exp_wa = i;
      exp_full = (exp_wa < 0);
      check("valid", W'(valid_o), W'(m_valid));
      check("overflow", W'(overflow), W'(we && exp_full));
      if (!exp_full) check("wr_addr", W'(wr_addr), W'(exp_wa));
      if (we && exp_full) n_full++;
      if (we && !exp_full && exp_wa == int'(rd_addr)) begin
        exp_rd = wdata;
        n_fwd++;
        check("rd_data fwd", rd_data, exp_rd);
      end else if (m_valid[rd_addr]) begin
        check("rd_data", rd_data, m_data[rd_addr]);
      end
      @(posedge clk);
      if (clear) m_valid = '0;
      else begin
        if (we && !exp_full) begin
          m_data[exp_wa] = wdata;
          m_valid[exp_wa] = 1'b1;
        end
        if (rd_rst) m_valid[rd_addr] = 1'b0;
      end
    end
    checks++;
    if (n_full == 0 || n_fwd == 0) begin
      failures++;
      $display("FAIL coverage full=%0d fwd=%0d", n_full, n_fwd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
