// bsn_subsample: sub-sampling block of an approximate sorting network.
//
// Takes a sorted thermometer stream (1s at the top) and performs truncated
// quantisation: it clips `clip` bits off each end and then keeps one bit of
// every `stride` bits of what remains, which divides the represented value by
// `stride` and saturates it at +-(IN_W/2 - clip)/stride. Clip and stride are
// the c_i and s_i of the source paper's parameterised BSN; they arrive at run
// time so one network can produce partial sums of different lengths.
//
// Output sample k (k = 0 is the top) is the input bit at depth
// clip + k*stride + (stride-1)/2 from the top, i.e. the middle of its window
// (which bit of the window is taken is this design's choice). The result is
// top-aligned in dout: with n = (IN_W - 2*clip)/stride samples, dout[OUT_W-1 -: n]
// holds them and the bits below are 0. A stride of 0 is treated as 1.
// Combinational.
module bsn_subsample
  import sc_pkg::*;
#(
  parameter int unsigned IN_W  = 288,
  parameter int unsigned OUT_W = 256
) (
  input  logic [IN_W-1:0]  din,   // sorted input stream
  input  ss_cfg_t          cfg,   // clip and stride
  output logic [OUT_W-1:0] dout   // top-aligned sub-sampled stream
);
  logic [4:0]  s;      // effective stride
  logic [3:0]  off;    // position of the kept bit inside its window
  logic [15:0] n;      // number of valid samples

  assign s   = (cfg.stride == '0) ? 5'd1 : {1'b0, cfg.stride};
  assign off = 4'((s - 5'd1) >> 1);
  assign n   = (2 * 16'(cfg.clip) >= 16'(IN_W)) ? '0 : (16'(IN_W) - 2 * 16'(cfg.clip)) / 16'(s);

  always_comb begin
    dout = '0;
    for (int unsigned k = 0; k < OUT_W; k++) begin
      if (k < 32'(n) && 32'(cfg.clip) + k * 32'(s) + 32'(off) < IN_W)
        dout[OUT_W-1-k] = din[IN_W-1-(32'(cfg.clip) + k * 32'(s) + 32'(off))];
    end
  end
endmodule
