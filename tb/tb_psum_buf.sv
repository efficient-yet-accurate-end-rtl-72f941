// tb_psum_buf: slots read as alternating 1/0 filler until written; written
// partial sums and the residual slot read back in place; clear empties all.
module tb_psum_buf;
  logic         clk = 0, rst_n = 0, clear = 0, wr_en = 0, res_wr = 0;
  logic [2:0]   wr_idx = '0;
  logic [71:0]  wr_data = '0, res_data = '0;
  logic [575:0] rd_data;
  logic [71:0]  model [8];
  logic [7:0]   vld;
  int checks = 0, failures = 0;

  psum_buf dut (.clk, .rst_n, .clear, .wr_en, .wr_idx, .wr_data, .res_wr, .res_data, .rd_data);

  always #5 clk = ~clk;

  function automatic logic [71:0] fill();
    logic [71:0] f;
    for (int i = 0; i < 72; i++) f[i] = i[0];
    return f;
  endfunction

  task automatic compare();
    for (int s = 0; s < 8; s++) begin
      checks++;
      if (rd_data[s*72 +: 72] !== (vld[s] ? model[s] : fill())) begin
        failures++;
        $display("FAIL slot %0d", s);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vld = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1 compare();
    for (int r = 0; r < 3; r++) begin
      for (int s = 0; s < 7; s++) begin
        if ($urandom_range(0, 1) == 1) begin
          logic [71:0] d;
          d = {$urandom, $urandom, $urandom};
          wr_en <= 1; wr_idx <= 3'(s); wr_data <= d;
          model[s] = d; vld[s] = 1;
          @(posedge clk);
          wr_en <= 0;
          #1 compare();
        end
      end
      res_data <= {$urandom, $urandom, $urandom};
      res_wr <= 1;
      @(posedge clk);
      res_wr <= 0;
      model[7] = res_data; vld[7] = 1;
      #1 compare();
      clear <= 1;
      @(posedge clk);
      clear <= 0;
      vld = '0;
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
