// sel_interconnect: selective interconnect (SI) realising an activation
// function on a sorted thermometer stream.
//
// Because the BSN output is sorted, its bit IN_W-n is 1 exactly when the
// accumulated count is at least n. Output bit o is a copy of one bit of the
// extended input {1, din, 0} chosen by sel[o]: index 0 is a constant 0, index
// j (1..IN_W) is din[j-1], index IN_W+1 is a constant 1. Choosing, for each
// output level, the threshold at which it should switch on yields any
// monotone staircase function of the accumulated value, e.g. the two-step
// activation (sel of the 3rd and 6th bits of an 8-bit BSN) or a batch-norm
// fused ReLU with 16-bit output. Picking BSN bits by selection signals is the
// source paper's; the constant-0/1 entries and the index encoding are this
// design's choice. The selection signals come from configuration and are held
// static during a layer. Combinational.
module sel_interconnect #(
  parameter int unsigned IN_W  = 256,
  parameter int unsigned OUT_W = 16,
  parameter int unsigned SEL_W = $clog2(IN_W + 2)
) (
  input  logic [IN_W-1:0]             din,   // sorted BSN output
  input  logic [OUT_W-1:0][SEL_W-1:0] sel,   // per-output-bit selection
  output logic [OUT_W-1:0]            dout   // activation, thermometer code
);
  logic [IN_W+1:0] ext;

  assign ext = {1'b1, din, 1'b0};

  always_comb begin
    for (int unsigned o = 0; o < OUT_W; o++)
      dout[o] = (int'(sel[o]) <= IN_W + 1) ? ext[sel[o]] : 1'b0;
  end
endmodule
