// tb_mul_array: random operands into all 288 lanes; each 2-bit product is
// checked against the ternary product of its lane's operands.
module tb_mul_array;
  import tb_ref_pkg::*;
  localparam int N = 288;
  logic [N-1:0][1:0] act, wgt;
  logic [2*N-1:0]    prod;
  int checks = 0, failures = 0;

  mul_array dut (.act(act), .wgt(wgt), .prod(prod));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < N; i++) begin
        act[i] = 2'($urandom_range(0, 3));
        wgt[i] = 2'($urandom_range(0, 3));
      end
      #1;
      for (int i = 0; i < N; i++) begin
        int v;
        v = tern(act[i]) * tern(wgt[i]);
        checks++;
        if (tern(prod[2*i +: 2]) != v || prod[2*i +: 2] == 2'b01) begin
          failures++;
          if (failures < 5) $display("FAIL lane %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
