// tb_bsn_sorter: self-checking test of the bitonic sorting network.
//
// Drives random bit vectors of every density (plus all-0 and all-1) into a
// 576-bit sorter and checks that the output is a thermometer code (1s at the
// top, no 1 below a 0) whose number of 1s equals the input's. A second, 8-bit
// instance is checked exhaustively over all 256 inputs.
module tb_bsn_sorter;
  localparam int unsigned W = 576;

  logic [W-1:0] din, dout;
  logic [7:0]   d8, q8;
  int checks = 0, failures = 0;

  bsn_sorter #(.W(W)) dut (.din(din), .dout(dout));
  bsn_sorter #(.W(8)) dut8 (.din(d8), .dout(q8));

  function automatic logic [W-1:0] thermo(int unsigned k);
    logic [W-1:0] t = '0;
    for (int unsigned i = 0; i < k; i++) t[W-1-i] = 1'b1;
    return t;
  endfunction

  task automatic check_vec(input logic [W-1:0] v);
    din = v;
    #1;
    checks++;
    if (dout !== thermo($countones(v))) begin
      failures++;
      $display("FAIL: ones=%0d got ones=%0d", $countones(v), $countones(dout));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v;
    check_vec('0);
    check_vec('1);
    for (int t = 0; t < 300; t++) begin
      int unsigned p = $urandom_range(0, 100);
      for (int i = 0; i < W; i++) v[i] = ($urandom_range(0, 99) < p);
      check_vec(v);
    end
    for (int i = 0; i < 256; i++) begin
      d8 = 8'(i);
      #1;
      checks++;
      if (q8 !== ((8'hff << (8 - $countones(d8))) & 8'hff) || ($countones(d8) == 0 && q8 != 0)) begin
        failures++;
        $display("FAIL 8-bit: in=%b out=%b", d8, q8);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
