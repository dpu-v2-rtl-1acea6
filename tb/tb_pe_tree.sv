// tb_pe_tree: self-checking test of one PE tree (D = 3, 7 PEs).
// A new set of 8 inputs and 7 PE operations is issued every cycle; each
// layer receives the operations of the set its data belongs to (layer l,
// l cycles after issue). All 7 results of a set must appear together D
// cycles after its inputs, equal to a reference evaluation of the tree, so
// the test checks both function and latency.
module tb_pe_tree;
  import dpu_pkg::*;
  localparam int unsigned W = 32, D = 3, NIN = 8, NPE = 7, N = 400;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] in_data [NIN];
  pe_op_e       op [NPE];
  logic [W-1:0] y [NPE];
  logic [W-1:0] s_in  [N][NIN];
  pe_op_e       s_op  [N][NPE];
  logic [W-1:0] s_exp [N][NPE];
  int checks = 0, failures = 0;

  pe_tree #(.W(W), .D(D)) dut (.clk(clk), .rst_n(rst_n), .in_data(in_data), .op(op), .y(y));

  always #5 clk = ~clk;

  function automatic logic [W-1:0] f(pe_op_e o, logic [W-1:0] a, logic [W-1:0] b);
    case (o)
      PE_ADD: return a + b;
      PE_MUL: return a * b;
      PE_PASSA: return a;
      default: return b;
    endcase
  endfunction

  function automatic int layer_of(int p);
    return (p < 4) ? 0 : (p < 6) ? 1 : 2;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < N; s++) begin
      for (int k = 0; k < NIN; k++) s_in[s][k] = (s % 3 == 0) ? W'($urandom_range(20)) : $urandom();
      for (int p = 0; p < NPE; p++) s_op[s][p] = pe_op_e'($urandom_range(3));
      for (int i = 0; i < 4; i++) s_exp[s][i] = f(s_op[s][i], s_in[s][2*i], s_in[s][2*i+1]);
      for (int i = 0; i < 2; i++) s_exp[s][4+i] = f(s_op[s][4+i], s_exp[s][2*i], s_exp[s][2*i+1]);
      s_exp[s][6] = f(s_op[s][6], s_exp[s][4], s_exp[s][5]);
    end
    for (int k = 0; k < NIN; k++) in_data[k] = '0;
    for (int p = 0; p < NPE; p++) op[p] = PE_ADD;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N + D; c++) begin
      @(negedge clk);
      if (c >= D) begin
        for (int p = 0; p < NPE; p++) begin
          checks++;
          if (y[p] !== s_exp[c-D][p]) begin
            failures++;
            if (failures < 10) $display("FAIL set %0d pe %0d got %h exp %h", c-D, p, y[p], s_exp[c-D][p]);
          end
        end
      end
      for (int k = 0; k < NIN; k++) in_data[k] = (c < N) ? s_in[c][k] : '0;
      for (int p = 0; p < NPE; p++) begin
        automatic int s = c - layer_of(p);
        op[p] = (s >= 0 && s < N) ? s_op[s][p] : PE_ADD;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
