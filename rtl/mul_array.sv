// mul_array: row of ternary SC multipliers feeding the sorting network.
//
// N_MUL multipliers work in parallel; lane i multiplies act[i] by wgt[i] and
// writes its 2-bit thermometer product to bits [2i+1:2i] of prod. With the
// default N_MUL = 288 the row produces the 576 bits that the BSN consumes per
// cycle. The 576-bit width is the figure's; splitting it into 288 two-bit
// products is this design's reading of it. Combinational.
module mul_array #(
  parameter int unsigned N_MUL = 288
) (
  input  logic [N_MUL-1:0][1:0] act,   // ternary activations
  input  logic [N_MUL-1:0][1:0] wgt,   // ternary weights
  output logic [2*N_MUL-1:0]    prod   // concatenated 2-bit products
);
  for (genvar i = 0; i < N_MUL; i++) begin : g_mul
    sc_mul u_mul (.a(act[i]), .b(wgt[i]), .p(prod[2*i +: 2]));
  end
endmodule
