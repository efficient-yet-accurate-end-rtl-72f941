// sc_nla_top: end-to-end SC non-linear adder with spatial-temporal BSN,
// high-precision residual and BN-fused activation.
//
// One output activation is computed per operation. Each input beat brings
// N_MUL 16-bit activations and N_MUL ternary weights; the activations are
// quantised to ternary (act_quant), multiplied (mul_array) and the 576
// product bits are accumulated by one approximate BSN (appr_bsn). With more
// than one beat the BSN is reused in time: every beat yields a 72-bit partial
// sum kept in the buffer (psum_buf), and a final pass sorts the buffer,
// together with the re-scaled 16-bit residual (res_rescale), into 256 bits.
// The selective interconnect (sel_interconnect) then applies the activation,
// e.g. BN-fused ReLU, and emits a 16-bit thermometer activation.
// Structure (MUL -> mux -> BSN -> demux -> BUF / SI, 576/72/256/16 bits) is
// the source paper's; the handshake, configuration port and residual slot are
// this design's choices.
// Timing: start (with cfg and res_in) in cycle 0; beats are taken while
// in_ready is high; with K beats the result is in act_out with out_valid
// K+1 cycles after the first beat (1 cycle in the single-pass bypass),
// later if the residual division is still running. si_sel and aq_sel must be
// held stable during an operation.
module sc_nla_top
  import sc_pkg::*;
#(
  parameter int unsigned N_MUL   = BSN_IN_W / 2,
  parameter int unsigned PSUM    = PSUM_W,
  parameter int unsigned FINAL   = FINAL_W,
  parameter int unsigned SLOTS   = PSUM_SLOTS,
  parameter int unsigned OUT_BSL = ACT_BSL,
  parameter int unsigned SI_SEL_W = $clog2(FINAL + 2),
  parameter int unsigned AQ_SEL_W = $clog2(ACT_BSL + 2)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  nla_cfg_t                         cfg,
  input  logic [OUT_BSL-1:0][SI_SEL_W-1:0] si_sel,   // activation function
  input  logic [1:0][AQ_SEL_W-1:0]         aq_sel,   // input quantiser
  input  logic [ACT_BSL-1:0]               res_in,   // residual (at start)
  input  logic [N_MUL-1:0][ACT_BSL-1:0]    act_in,
  input  logic [N_MUL-1:0][1:0]            wgt_in,
  input  logic                             in_valid,
  output logic                             in_ready,
  output logic [OUT_BSL-1:0]               act_out,
  output logic                             out_valid,
  output logic                             busy,
  output logic                             stall
);
  localparam int unsigned IN_W = 2 * N_MUL;

  nla_cfg_t               cfg_q;   // only res_en and the BSN settings are read
  logic [N_MUL-1:0][1:0]  act2;
  logic [IN_W-1:0]        prod, buf_rd, bsn_in;
  logic [FINAL-1:0]       bsn_out;
  logic [OUT_BSL-1:0]     si_out;
  logic                   pass_final, sel_buf, buf_clear, buf_wr, out_load;
  logic [2:0]             buf_idx;
  logic                   res_done, res_wr, res_in_buf;
  logic [PSUM-1:0]        res_slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_q <= '0;
    else if (start && !busy) cfg_q <= cfg;
  end

  act_quant #(.N(N_MUL), .BSL(ACT_BSL), .SEL_W(AQ_SEL_W)) u_aq (
    .act16(act_in), .sel(aq_sel), .act2(act2));

  mul_array #(.N_MUL(N_MUL)) u_mul (.act(act2), .wgt(wgt_in), .prod(prod));

  // BSN input mux: products during partial passes, buffer in the final pass.
  assign bsn_in = sel_buf ? buf_rd : prod;

  appr_bsn #(.IN_W(IN_W), .M1(IN_W / 64), .L1(64), .C1(0), .S1(2), .OUT_W(FINAL)) u_bsn (
    .din(bsn_in), .cfg(pass_final ? cfg_q.ss_final : cfg_q.ss_part), .dout(bsn_out));

  // BSN output demux: the top PSUM bits go to the buffer, all bits to the SI.
  psum_buf #(.SLOTS(SLOTS), .SLOT_W(PSUM)) u_buf (
    .clk, .rst_n, .clear(buf_clear), .wr_en(buf_wr), .wr_idx(buf_idx),
    .wr_data(bsn_out[FINAL-1 -: PSUM]),
    .res_wr(res_wr), .res_data(res_slot),
    .rd_data(buf_rd));

  res_rescale #(.BSL(ACT_BSL), .SLOT_W(PSUM)) u_res (
    .clk, .rst_n, .start(start && !busy), .res(res_in), .mode(cfg.res_mode),
    .shift(cfg.res_shift), .done(res_done), .slot(res_slot));

  sel_interconnect #(.IN_W(FINAL), .OUT_W(OUT_BSL), .SEL_W(SI_SEL_W)) u_si (
    .din(bsn_out), .sel(si_sel), .dout(si_out));

  // The residual slot is written once, in the cycle after re-scaling ends;
  // the final pass may only start when the slot holds it.
  assign res_wr = cfg_q.res_en && res_done && busy && !res_in_buf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_in_buf <= 1'b0;
    else if (start && !busy) res_in_buf <= 1'b0;
    else if (res_wr) res_in_buf <= 1'b1;
  end

  st_ctrl u_ctrl (
    .clk, .rst_n, .start(start && !busy), .n_beats(cfg.n_beats), .res_en(cfg.res_en),
    .res_done(res_in_buf), .in_valid, .in_ready, .pass_final, .sel_buf, .buf_clear, .buf_wr,
    .buf_idx, .out_load, .busy, .stall);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_out   <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= out_load;
      if (out_load) act_out <= si_out;
    end
  end

  initial assert (IN_W == SLOTS * PSUM) else $error("sc_nla_top: buffer must fill one BSN input");
endmodule
