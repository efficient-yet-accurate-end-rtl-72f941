// tb_sel_interconnect: the SI realises staircase activations.
//  1. 8-bit BSN, 2-bit output selecting the 3rd and 6th sorted bits: the
//     two-step function -1 (x < -1), 0 (-1 <= x <= 1), +1 (x > 1).
//  2. 320-bit input (x_q in -160..160), 16-bit output, BN-fused ReLU
//     y_q = clamp(floor((x_q+20)/15), 0, 8) and y_q = clamp(floor(x_q/5), 0, 8),
//     for every x_q; the selections are derived from those thresholds.
module tb_sel_interconnect;
  logic [7:0]        d8;
  logic [1:0][3:0]   s8;
  logic [1:0]        q8;
  logic [319:0]      d320;
  logic [15:0][8:0]  s320;
  logic [15:0]       q320;
  int checks = 0, failures = 0;

  sel_interconnect #(.IN_W(8), .OUT_W(2)) dut8 (.din(d8), .sel(s8), .dout(q8));
  sel_interconnect #(.IN_W(320), .OUT_W(16)) dut320 (.din(d320), .sel(s320), .dout(q320));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Selections for y >= t  <=>  ones_in >= thr(t), output level m = t + 8.
  task automatic set_relu(input int num_off, input int den);
    for (int m = 1; m <= 16; m++) begin
      if (m <= 8) s320[16-m] = 9'd321;             // always on (ReLU >= 0)
      else begin
        int t, xthr, n;
        t = m - 8;
        xthr = den * t - num_off;                  // x_q >= xthr
        n = xthr + 160;                            // ones threshold
        s320[16-m] = (n <= 0) ? 9'd321 : (n > 320) ? 9'd0 : 9'(320 - n + 1);
      end
    end
  endtask

  initial begin
    // Fig-style two-step activation: out[1] = Y[5], out[0] = Y[2]
    s8[1] = 4'd6;
    s8[0] = 4'd3;
    for (int ones = 0; ones <= 8; ones++) begin
      int x, f;
      d8 = '0;
      for (int i = 0; i < ones; i++) d8[7-i] = 1'b1;
      #1;
      x = ones - 4;
      f = (x < -1) ? -1 : (x <= 1) ? 0 : 1;
      checks++;
      if (q8 !== ((f == 1) ? 2'b11 : (f == 0) ? 2'b10 : 2'b00)) begin
        failures++;
        $display("FAIL two-step x=%0d q=%b", x, q8);
      end
    end
    for (int fn = 0; fn < 2; fn++) begin
      if (fn == 0) set_relu(20, 15); else set_relu(0, 5);
      for (int x = -160; x <= 160; x++) begin
        int y, q;
        d320 = '0;
        for (int i = 0; i < x + 160; i++) d320[319-i] = 1'b1;
        #1;
        q = (fn == 0) ? (x + 20 + 300) / 15 - 20 : (x + 300) / 5 - 60;  // floor
        y = (q < 0) ? 0 : (q > 8) ? 8 : q;
        checks++;
        if ($countones(q320) - 8 != y || q320[15 -: 8] !== 8'hff) begin
          failures++;
          if (failures < 6) $display("FAIL relu fn=%0d x=%0d y=%0d got=%0d", fn, x, y, $countones(q320) - 8);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
