// tb_st_ctrl: controller sequences. For K beats the controller must accept
// exactly K beats (with bubbles on in_valid), write slots 0..K-1, then run
// one final pass on the buffer; with K = 1 and no residual it must finish in
// the accepting cycle without writing the buffer (bypass); with a residual
// that is not ready the final pass must stall until res_done.
module tb_st_ctrl;
  logic clk = 0, rst_n = 0, start = 0, res_en = 0, res_done = 0, in_valid = 0;
  logic [3:0] n_beats = 4'd1;
  logic in_ready, pass_final, sel_buf, buf_clear, buf_wr, out_load, busy, stall;
  logic [2:0] buf_idx;
  int checks = 0, failures = 0;

  st_ctrl dut (.clk, .rst_n, .start, .n_beats, .res_en, .res_done, .in_valid,
               .in_ready, .pass_final, .sel_buf, .buf_clear, .buf_wr, .buf_idx,
               .out_load, .busy, .stall);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int k = 1; k <= 8; k++) begin
      for (int r = 0; r < 2; r++) begin
        int accepted, writes, stalls, cycles;
        bit done;
        if (r == 1 && k == 8) continue;
        @(posedge clk);
        n_beats <= 4'(k); res_en <= r[0]; res_done <= 0; start <= 1;
        @(posedge clk);
        start <= 0;
        accepted = 0; writes = 0; stalls = 0; cycles = 0; done = 0;
        while (!done && cycles < 60) begin
          in_valid <= ($urandom_range(0, 3) != 0);
          res_done <= (cycles > 12);
          #1;
          if (in_ready && in_valid) begin
            if (buf_wr) begin
              check(buf_idx == 3'(accepted), "slot index");
              writes++;
            end
            check(!sel_buf, "mux on products during a beat");
            accepted++;
          end
          if (stall) stalls++;
          if (out_load) begin
            done = 1;
            if (k == 1 && r == 0) check(pass_final && !sel_buf, "bypass pass");
            else check(pass_final && sel_buf, "final pass on buffer");
          end
          @(posedge clk);
          cycles++;
        end
        in_valid <= 0;
        check(done, "operation finished");
        check(accepted == k, "beat count");
        check(writes == ((k == 1 && r == 0) ? 0 : k), "buffer writes");
        if (r == 1 && k < 4) check(stalls > 0, "stall on residual");
        @(posedge clk);
        check(!busy, "idle after result");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
