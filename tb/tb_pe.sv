// tb_pe: self-checking test of the processing element.
// Drives random operands with each of the four operations and compares the
// output with the expected sum, product (low W bits) or bypassed input.
module tb_pe;
  import dpu_pkg::*;
  localparam int unsigned W = 32;
  pe_op_e op;
  logic [W-1:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  pe #(.W(W)) dut (.op(op), .a(a), .b(b), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      a  = $urandom();
      b  = (n % 7 == 0) ? 32'hFFFF_FFFF : $urandom();
      op = pe_op_e'(n % 4);
      #1;
      case (n % 4)
        0: exp_y = W'(64'(a) + 64'(b));
        1: exp_y = W'(64'(a) * 64'(b));
        2: exp_y = a;
        default: exp_y = b;
      endcase
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", op, a, b, y, exp_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
