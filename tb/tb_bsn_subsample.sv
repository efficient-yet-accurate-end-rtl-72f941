// tb_bsn_subsample: sorted 288-bit streams of every count go through the
// sub-sampler with several clip/stride settings; the output must be a
// top-aligned thermometer code with the reference number of 1s. Spot checks
// tie the settings to values: clip 16 / stride 1 saturates at 16..272 ones,
// clip 72 / stride 2 keeps round((ones-72)/2) clipped to 0..72.
module tb_bsn_subsample;
  import sc_pkg::*;
  import tb_ref_pkg::*;
  localparam int IN_W = 288, OUT_W = 256;
  logic [IN_W-1:0]  din;
  logic [OUT_W-1:0] dout;
  ss_cfg_t          cfg;
  int checks = 0, failures = 0;

  bsn_subsample #(.IN_W(IN_W), .OUT_W(OUT_W)) dut (.din(din), .cfg(cfg), .dout(dout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [OUT_W-1:0] top_thermo(int k);
    logic [OUT_W-1:0] t = '0;
    for (int i = 0; i < k; i++) t[OUT_W-1-i] = 1'b1;
    return t;
  endfunction

  initial begin
    int clips[4]   = '{16, 72, 0, 10};
    int strides[4] = '{1, 2, 4, 3};
    for (int c = 0; c < 4; c++) begin
      cfg.clip = 9'(clips[c]);
      cfg.stride = 4'(strides[c]);
      for (int ones = 0; ones <= IN_W; ones++) begin
        int exp_cnt;
        din = '0;
        for (int i = 0; i < ones; i++) din[IN_W-1-i] = 1'b1;
        #1;
        exp_cnt = ss_count(ones, IN_W, clips[c], strides[c]);
        checks++;
        if (dout !== top_thermo(exp_cnt)) begin
          failures++;
          if (failures < 5) $display("FAIL c=%0d ones=%0d cnt=%0d", c, ones, $countones(dout));
        end
        if (c == 0) begin
          checks++;
          if ($countones(dout) != ((ones < 16) ? 0 : (ones > 272) ? 256 : ones - 16)) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
