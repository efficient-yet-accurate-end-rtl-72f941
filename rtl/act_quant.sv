// act_quant: 2b-BSL activation quantiser in front of the multipliers.
//
// The network keeps its activations as 16-bit thermometer streams (values
// -8..8) but convolves with ternary (2-bit) activations. Each of the N lanes
// turns its 16-bit stream into a 2-bit one with a 2-output selective
// interconnect: output bit 1 is on when the value reaches the lower threshold,
// bit 0 when it passes the upper one, so the lane yields -1, 0 or +1. The two
// selection indices are shared by all lanes and come from configuration.
// Placing a 2b quantiser on the high-precision input follows the source
// paper's network structure; realising it with an SI is this design's
// choice. Combinational.
module act_quant #(
  parameter int unsigned N     = 288,
  parameter int unsigned BSL   = 16,
  parameter int unsigned SEL_W = $clog2(BSL + 2)
) (
  input  logic [N-1:0][BSL-1:0] act16,   // high-precision activations
  input  logic [1:0][SEL_W-1:0] sel,     // shared thresholds (SI selections)
  output logic [N-1:0][1:0]     act2     // ternary activations
);
  for (genvar i = 0; i < N; i++) begin : g_lane
    sel_interconnect #(.IN_W(BSL), .OUT_W(2), .SEL_W(SEL_W)) u_si (
      .din(act16[i]), .sel(sel), .dout(act2[i]));
  end
endmodule
