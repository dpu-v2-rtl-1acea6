// tb_output_interconnect: self-checking test of the output interconnect.
// Every PE result gets a distinct value (tree, PE index); for each bank and
// layer select the expected source is found by searching the layer for the
// PE whose subtree covers the bank's tree input position.
module tb_output_interconnect;
  localparam int unsigned W = 32, D = 3, B = 64, NIN = 8, T = 8, NPE = 7, LSEL = 2;
  logic [W-1:0]    pe_y [T][NPE];
  logic [LSEL-1:0] sel [B];
  logic [W-1:0]    out [B];
  int checks = 0, failures = 0;

  output_interconnect #(.W(W), .D(D), .B(B)) dut (.pe_y(pe_y), .sel(sel), .out(out));

  function automatic logic [W-1:0] expected(int j, int l);
    int t = j / NIN, k = j % NIN, base = 0, span;
    for (int q = 0; q < l; q++) base += NIN >> (q + 1);
    span = 2 << l;                        // tree inputs covered by a layer-l PE
    for (int i = 0; i < (NIN >> (l + 1)); i++)
      if (k >= i * span && k < (i + 1) * span) return pe_y[t][base + i];
    return 'x;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int t = 0; t < T; t++)
        for (int p = 0; p < NPE; p++) pe_y[t][p] = {$urandom_range(255), 8'(t), 8'(p), 8'(n)};
      for (int j = 0; j < B; j++) sel[j] = LSEL'($urandom_range(D - 1));
      #1;
      for (int j = 0; j < B; j++) begin
        checks++;
        if (out[j] !== expected(j, int'(sel[j]))) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d layer %0d got %h", j, sel[j], out[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
