// tb_sc_nla_top: end-to-end test of the non-linear adder at its default
// size (288 multipliers, 576-bit BSN, 8 x 72-bit buffer, 256-bit final sum,
// 16-bit activation output).
//
// Random operations with 1..8 beats, with and without residual (pass,
// multiply by 2/4, divide by 2/4/8), random bubbles on in_valid and a random
// BN-fused ReLU in the SI. A bit-level reference model rebuilds every
// product, the group counts of both BSN stages, the buffer image and the SI
// output. It also checks the timing: the result appears 2 cycles after the
// last beat (1 cycle in the single-pass bypass) unless the final pass
// stalls for the residual, and an 8-beat operation without bubbles takes 9
// BSN cycles. Each mechanism (bypass, temporal reuse, residual multiply,
// residual divide, stall, input bubble, full 8-beat reuse) must occur.
module tb_sc_nla_top;
  import sc_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 288;

  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  nla_cfg_t cfg;
  logic [15:0][8:0] si_sel;
  logic [1:0][4:0]  aq_sel;
  logic [15:0]      res_in;
  logic [N-1:0][15:0] act_in;
  logic [N-1:0][1:0]  wgt_in;
  logic in_ready, out_valid, busy, stall;
  logic [15:0] act_out;
  int checks = 0, failures = 0;
  int n_bypass = 0, n_reuse = 0, n_rmul = 0, n_rdiv = 0, n_stall = 0, n_bubble = 0, n_full = 0;

  sc_nla_top dut (.clk, .rst_n, .start, .cfg, .si_sel, .aq_sel, .res_in, .act_in,
                  .wgt_in, .in_valid, .in_ready, .act_out, .out_valid, .busy, .stall);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [575:0] fill576();
    logic [575:0] f;
    for (int i = 0; i < 576; i++) f[i] = i[0];
    return f;
  endfunction

  // Count of 1s after both BSN stages for a 576-bit input.
  function automatic int bsn_count(logic [575:0] v, int clip, int stride);
    int s2 = 0;
    for (int g = 0; g < 9; g++) s2 += ss_count($countones(v[g*64 +: 64]), 64, 0, 2);
    return ss_count(s2, 288, clip, stride);
  endfunction

  initial begin
    logic [575:0] bufimg;
    aq_sel[1] = 5'd9;   // activation bit 1: value >= 0
    aq_sel[0] = 5'd8;   // activation bit 0: value >= 1
    cfg = '0;
    res_in = '0;
    act_in = '0;
    wgt_in = '0;
    si_sel = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int op = 0; op < 40; op++) begin
      int k, rmode, rshift, rv, beat, cyc, last_beat_cyc, stalled, cf, step, beta, exp_ones;
      logic [15:0] exp_out;
      bit bubbles, single;
      k      = (op < 8) ? op + 1 : $urandom_range(1, 8);
      rmode  = (k == 8) ? 0 : $urandom_range(0, 3);   // 0 none, 1 pass, 2 mul, 3 div
      if (op == 8) begin k = 1; rmode = 3; end        // forces a stall
      rshift = (rmode == 2) ? $urandom_range(1, 2) : (rmode == 3) ? $urandom_range(1, 3) : 0;
      if (op == 8) rshift = 3;
      rv     = $urandom_range(0, 16) - 8;
      bubbles = (op % 3 == 1);
      single = (k == 1 && rmode == 0);
      step   = $urandom_range(1, 8);
      beta   = $urandom_range(0, 40) - 20;
      for (int m = 1; m <= 16; m++) begin
        int n;
        n = beta + step * (m - 8) + 128;            // ones threshold of level m
        si_sel[16-m] = (m <= 8 || n <= 0) ? 9'd257 : (n > 256) ? 9'd0 : 9'(256 - n + 1);
      end
      @(posedge clk);
      cfg.n_beats   <= 4'(k);
      cfg.res_en    <= (rmode != 0);
      cfg.res_mode  <= (rmode == 2) ? RES_MUL : (rmode == 3) ? RES_DIV : RES_PASS;
      cfg.res_shift <= 3'(rshift);
      cfg.ss_part   <= '{clip: 9'd72, stride: 4'd2};
      cfg.ss_final  <= '{clip: 9'd16, stride: 4'd1};
      res_in <= 16'hffff << (8 - rv);
      start  <= 1;
      @(posedge clk);
      start <= 0;
      bufimg = fill576();
      beat = 0; cyc = 0; stalled = 0; last_beat_cyc = 0;
      cf = 0;
      while (!out_valid && cyc < 100) begin
        logic go;
        go = (beat < k) && !(bubbles && $urandom_range(0, 2) == 0);
        if (beat < k && !go) n_bubble++;
        if (go) begin
          for (int i = 0; i < N; i++) begin
            act_in[i] <= 16'hffff << $urandom_range(0, 16);
            wgt_in[i] <= 2'($urandom_range(0, 3));
          end
        end
        in_valid <= go;
        #1;
        if (in_valid && in_ready) begin
          logic [575:0] pv;
          for (int i = 0; i < N; i++) begin
            int a, w, p;
            a = ($countones(act_in[i]) >= 9) ? 1 : ($countones(act_in[i]) >= 8) ? 0 : -1;
            w = tern(wgt_in[i]);
            p = a * w;
            pv[2*i +: 2] = (p == 1) ? 2'b11 : (p == 0) ? 2'b10 : 2'b00;
          end
          if (single) cf = bsn_count(pv, 16, 1);
          else begin
            int pc;
            pc = bsn_count(pv, 72, 2);
            bufimg[beat*72 +: 72] = '0;
            for (int b = 0; b < pc; b++) bufimg[beat*72 + 71 - b] = 1'b1;
          end
          beat++;
          last_beat_cyc = cyc;
        end
        if (stall) stalled++;
        @(posedge clk);
        cyc++;
        #1;
      end
      in_valid <= 0;
      if (!single) begin
        if (rmode != 0) begin
          int copies, ones16;
          copies = (rmode == 2) ? (1 << rshift) : 1;
          ones16 = (rmode == 3) ? ceil_half(rv, rshift) + 8 : rv + 8;
          for (int b = 0; b < 72; b++) bufimg[7*72 + b] = b[0];
          for (int c = 0; c < copies; c++)
            for (int b = 0; b < 16; b++) bufimg[7*72 + 71 - 16*c - b] = (b < ones16);
        end
        cf = bsn_count(bufimg, 16, 1);
      end
      for (int o = 0; o < 16; o++)
        exp_out[o] = (si_sel[o] == 0) ? 1'b0 : (si_sel[o] == 9'd257) ? 1'b1
                   : (cf >= 256 - (int'(si_sel[o]) - 1));
      checks++;
      if (!out_valid || act_out !== exp_out) begin
        failures++;
        $display("FAIL op=%0d k=%0d rmode=%0d got=%b exp=%b", op, k, rmode, act_out, exp_out);
      end
      // timing: result 1 (bypass) or 2 cycles after the last beat, unless stalled
      checks++;
      if (stalled == 0 && (cyc - last_beat_cyc) != (single ? 1 : 2)) begin
        failures++;
        $display("FAIL latency op=%0d: %0d cycles after last beat", op, cyc - last_beat_cyc);
      end
      if (k == 8 && !bubbles) begin
        // beats in cycles 0..7, final pass in cycle 8: result after 9 BSN cycles
        checks++;
        if (cyc != 9) begin
          failures++;
          $display("FAIL 8-beat operation took %0d cycles", cyc);
        end
        n_full++;
      end
      if (single) n_bypass++; else n_reuse++;
      if (rmode == 2) n_rmul++;
      if (rmode == 3) n_rdiv++;
      if (stalled > 0) n_stall++;
    end
    $display("mechanisms: bypass=%0d reuse=%0d full8=%0d res_mul=%0d res_div=%0d stall=%0d bubble=%0d",
             n_bypass, n_reuse, n_full, n_rmul, n_rdiv, n_stall, n_bubble);
    checks++;
    if (n_bypass == 0 || n_reuse == 0 || n_full == 0 || n_rmul == 0 || n_rdiv == 0 ||
        n_stall == 0 || n_bubble == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
