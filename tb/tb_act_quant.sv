// tb_act_quant: 288 lanes of random 16-bit activations are quantised with
// thresholds R = 2 (and then R = 0); each lane must give -1 below -R, +1
// above R and 0 in between.
module tb_act_quant;
  import tb_ref_pkg::*;
  localparam int N = 288;
  logic [N-1:0][15:0] act16;
  logic [1:0][4:0]    sel;
  logic [N-1:0][1:0]  act2;
  int checks = 0, failures = 0;

  act_quant dut (.act16(act16), .sel(sel), .act2(act2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vals[N];
    for (int r = 0; r <= 2; r += 2) begin
      // bit 1 on when v >= -R (ones >= 8-R), bit 0 on when v > R (ones >= 9+R)
      sel[1] = 5'(16 - (8 - r) + 1);
      sel[0] = 5'(16 - (9 + r) + 1);
      for (int t = 0; t < 10; t++) begin
        for (int i = 0; i < N; i++) begin
          vals[i] = $urandom_range(0, 16) - 8;
          act16[i] = '0;
          for (int b = 0; b < vals[i] + 8; b++) act16[i][15-b] = 1'b1;
        end
        #1;
        for (int i = 0; i < N; i++) begin
          int e;
          e = (vals[i] < -r) ? -1 : (vals[i] > r) ? 1 : 0;
          checks++;
          if (tern(act2[i]) != e || act2[i] == 2'b01) begin
            failures++;
            if (failures < 5) $display("FAIL v=%0d r=%0d got=%b", vals[i], r, act2[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
