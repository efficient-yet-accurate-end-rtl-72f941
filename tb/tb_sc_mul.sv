// tb_sc_mul: exhaustive check of the ternary multiplier against the truth
// table (+1 = 11, 0 = 10 or 01, -1 = 00; products in 11/10/00).
module tb_sc_mul;
  import tb_ref_pkg::*;
  logic [1:0] a, b, p;
  int checks = 0, failures = 0;

  sc_mul dut (.a(a), .b(b), .p(p));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] exp_p;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      a = 2'(i); b = 2'(j);
      #1;
      case (tern(a) * tern(b))
        1:       exp_p = 2'b11;
        0:       exp_p = 2'b10;
        default: exp_p = 2'b00;
      endcase
      checks++;
      if (p !== exp_p) begin
        failures++;
        $display("FAIL a=%b b=%b p=%b exp=%b", a, b, p, exp_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
