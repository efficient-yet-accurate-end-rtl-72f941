// sc_mul: 2-bit x 2-bit ternary multiplier for thermometer-coded SC.
//
// Each operand is a 2-bit thermometer stream: 2'b11 = +1, 2'b10 or 2'b01 = 0,
// 2'b00 = -1. The product is returned in the same code, always as 2'b11, 2'b10
// or 2'b00. The mapping is the truth table of the ternary SC multiplier in the
// source paper; the gate-level netlist of the paper's 5-gate circuit is not
// reproduced here, the function is written as sum-of-products logic instead.
// Purely combinational, no clock.
module sc_mul (
  input  logic [1:0] a,  // first ternary operand (activation)
  input  logic [1:0] b,  // second ternary operand (weight)
  output logic [1:0] p   // ternary product
);
  logic a_pos, a_neg, b_pos, b_neg, p_pos, p_neg;

  always_comb begin
    a_pos = a[1] & a[0];
    a_neg = ~a[1] & ~a[0];
    b_pos = b[1] & b[0];
    b_neg = ~b[1] & ~b[0];
    p_pos = (a_pos & b_pos) | (a_neg & b_neg);
    p_neg = (a_pos & b_neg) | (a_neg & b_pos);
    // +1 -> 11, 0 -> 10, -1 -> 00
    p     = {~p_neg, p_pos};
  end
endmodule
