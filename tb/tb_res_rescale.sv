// tb_res_rescale: every residual value -8..8 is passed, multiplied by 2 and
// 4 (replication) and divided by 2, 4 and 8 (halving cycles). The slot's
// number of 1s must equal copies*ones + filler, the divided value must be
// the value halved N times rounding up, and done must rise N+1 cycles after
// start for division and 1 cycle after start otherwise.
module tb_res_rescale;
  import sc_pkg::*;
  import tb_ref_pkg::*;
  logic        clk = 0, rst_n = 0, start = 0, done;
  logic [15:0] res;
  res_mode_e   mode;
  logic [2:0]  shift;
  logic [71:0] slot;
  int checks = 0, failures = 0;

  res_rescale dut (.clk, .rst_n, .start, .res, .mode, .shift, .done, .slot);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    res = '0; mode = RES_PASS; shift = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int m = 0; m < 3; m++) begin
      for (int n = (m == 0) ? 0 : 1; n <= ((m == 0) ? 0 : (m == 1) ? 2 : 3); n++) begin
        for (int v = -8; v <= 8; v++) begin
          int cyc, copies, exp_ones, exp_v;
          @(posedge clk);
          res   <= 16'hffff << (8 - v);
          mode  <= (m == 0) ? RES_PASS : (m == 1) ? RES_MUL : RES_DIV;
          shift <= 3'(n);
          start <= 1;
          @(posedge clk);
          start <= 0;
          #1;
          cyc = 0;
          while (!done && cyc < 20) begin
            @(posedge clk);
            #1;
            cyc++;
          end
          // cyc counts edges after the start edge until done is seen
          checks++;
          if (cyc != ((m == 2) ? n + 1 : 1)) begin
            failures++;
            $display("FAIL latency m=%0d n=%0d cyc=%0d", m, n, cyc);
          end
          copies = (m == 1) ? (1 << n) : 1;
          if (m == 2) begin
            exp_v = ceil_half(v, n);
            exp_ones = (exp_v + 8) + (72 - 16) / 2;
          end else begin
            exp_ones = copies * (v + 8) + (72 - 16 * copies) / 2;
          end
          checks++;
          if ($countones(slot) != exp_ones) begin
            failures++;
            $display("FAIL value m=%0d n=%0d v=%0d ones=%0d exp=%0d", m, n, v, $countones(slot), exp_ones);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
