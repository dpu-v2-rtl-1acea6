// tb_input_xbar: self-checking test of the B x B input crossbar.
// Random bank words and random selects, including broadcasts of one bank to
// many outputs; every output must equal the selected input.
module tb_input_xbar;
  localparam int unsigned W = 32, B = 64, LB = 6;
  logic [W-1:0]  in_data [B];
  logic [LB-1:0] sel [B];
  logic [W-1:0]  out_data [B];
  int checks = 0, failures = 0;

  input_xbar #(.W(W), .B(B)) dut (.in_data(in_data), .sel(sel), .out_data(out_data));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int j = 0; j < B; j++) begin
        in_data[j] = $urandom();
        sel[j] = (n % 5 == 0) ? LB'(n % B) : LB'($urandom_range(B - 1));
      end
      #1;
      for (int j = 0; j < B; j++) begin
        checks++;
        if (out_data[j] !== in_data[sel[j]]) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d sel %0d", j, sel[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
