// tb_pipe_delay: self-checking test of the control-signal delay line.
// Feeds a random word each cycle and checks that it re-appears exactly DEPTH
// cycles later, and that the output is zero right after reset.
module tb_pipe_delay;
  localparam int unsigned WIDTH = 12, DEPTH = 3;
  logic clk = 0, rst_n = 0;
  logic [WIDTH-1:0] d, q;
  logic [WIDTH-1:0] hist [$];
  int checks = 0, failures = 0;

  pipe_delay #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .d(d), .q(q));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (q !== '0) failures++;
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) hist.push_back('0);
    for (int n = 0; n < 500; n++) begin
      d = WIDTH'($urandom());
      hist.push_back(d);
      @(posedge clk);
      #1;
      void'(hist.pop_front());
      checks++;
      if (q !== hist[0]) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d q=%h exp=%h", n, q, hist[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
