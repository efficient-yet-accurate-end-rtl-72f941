// st_ctrl: controller of the spatial-temporal BSN.
//
// Sequences one accumulation of n_beats x 576 bits through a single 576-bit
// approximate BSN, as in the source paper's temporal folding: each accepted
// input beat is one partial pass whose 72-bit partial sum goes to buffer slot
// 0, 1, ...; after the last beat one final pass re-sorts the buffer (partial
// sums plus residual) into the 256-bit result. With one beat and no residual
// the single pass already uses the final setting and bypasses the buffer.
// The final pass waits (stall) until the residual re-scaling is done.
// Control: in_ready is high while beats are accepted; pass_final selects the
// final BSN setting; sel_buf steers the buffer into the BSN; out_load marks
// the cycle whose SI output is the result. Handshake and state encoding are
// this design's choice.
module st_ctrl (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,      // begin an accumulation (config is latched)
  input  logic [3:0] n_beats,    // number of product passes
  input  logic       res_en,     // residual is part of the sum
  input  logic       res_done,   // residual slot is ready
  input  logic       in_valid,   // product beat present
  output logic       in_ready,   // beat accepted when in_valid & in_ready
  output logic       pass_final, // BSN uses the final setting this cycle
  output logic       sel_buf,    // BSN input is the buffer
  output logic       buf_clear,
  output logic       buf_wr,
  output logic [2:0] buf_idx,
  output logic       out_load,   // result appears on the SI this cycle
  output logic       busy,
  output logic       stall       // final pass waiting for the residual
);
  typedef enum logic [1:0] {S_IDLE, S_ACC, S_FINAL} state_e;

  state_e     state;
  logic [3:0] beat;
  logic [3:0] nb_q;
  logic       res_q;
  logic       single;

  assign single = (nb_q == 4'd1) && !res_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      beat  <= '0;
      nb_q  <= '0;
      res_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_ACC;
          beat  <= '0;
          nb_q  <= n_beats;
          res_q <= res_en;
        end
        S_ACC: if (in_valid) begin
          beat <= beat + 4'd1;
          if (single) state <= S_IDLE;
          else if (beat + 4'd1 >= nb_q) state <= S_FINAL;
        end
        S_FINAL: if (!res_q || res_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    in_ready   = (state == S_ACC);
    buf_clear  = (state == S_IDLE) && start;
    buf_wr     = (state == S_ACC) && in_valid && !single;
    buf_idx    = beat[2:0];
    stall      = (state == S_FINAL) && res_q && !res_done;
    pass_final = (state == S_FINAL) || ((state == S_ACC) && single);
    sel_buf    = (state == S_FINAL);
    out_load   = ((state == S_ACC) && in_valid && single) || ((state == S_FINAL) && !stall);
    busy       = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (rst_n && state == S_IDLE && start) begin
      assert (n_beats >= 4'd1 && n_beats <= 4'd8) else $error("st_ctrl: n_beats out of range");
      assert (!(res_en && n_beats > 4'd7)) else $error("st_ctrl: residual needs a free slot");
    end
  end
endmodule
