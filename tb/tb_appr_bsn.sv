// tb_appr_bsn: random 576-bit inputs of varying density through the
// approximate BSN, in partial (clip 72, stride 2) and final (clip 16,
// stride 1) settings. Reference: each 64-bit group contributes
// ceil(ones/2) bits to stage 2, whose 288-bit sum is sub-sampled by the
// run-time setting; the output must be the top-aligned thermometer code of
// that count. The approximation error against the exact sum is also bounded.
module tb_appr_bsn;
  import sc_pkg::*;
  import tb_ref_pkg::*;
  logic [575:0] din;
  logic [255:0] dout;
  ss_cfg_t      cfg;
  int checks = 0, failures = 0;

  appr_bsn dut (.din(din), .cfg(cfg), .dout(dout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int p, s2, exp_cnt, clip, stride;
      p = $urandom_range(0, 100);
      for (int i = 0; i < 576; i++) din[i] = ($urandom_range(0, 99) < p);
      clip   = (t % 2 == 0) ? 72 : 16;
      stride = (t % 2 == 0) ? 2 : 1;
      cfg.clip = 9'(clip);
      cfg.stride = 4'(stride);
      #1;
      s2 = 0;
      for (int g = 0; g < 9; g++) s2 += ss_count($countones(din[g*64 +: 64]), 64, 0, 2);
      exp_cnt = ss_count(s2, 288, clip, stride);
      checks++;
      if ($countones(dout) != exp_cnt || dout[255 -: 1] !== (exp_cnt > 0) ||
          (exp_cnt < 256 && dout[255 - exp_cnt] !== 1'b0)) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d got=%0d exp=%0d", t, $countones(dout), exp_cnt);
      end
      // value check in final setting: out - 128 approximates (sum - 288)/2
      if (stride == 1 && $countones(din) > 300 && $countones(din) < 540) begin
        int err;
        err = ($countones(dout) - 128) * 2 - ($countones(din) - 288);
        checks++;
        if (err > 9 || err < -9) begin
          failures++;
          $display("FAIL value err=%0d", err);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
