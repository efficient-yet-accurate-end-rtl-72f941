// bsn_sorter: bitonic sorting network (BSN) for thermometer-coded SC.
//
// Sorts the W input bits so that all 1s move to the top (high indices) and the
// output is a thermometer code whose number of 1s equals the number of 1s over
// all inputs: sorting is accumulation. The network is Batcher's bitonic sorter
// built from two-input comparators; on single bits a comparator is an AND gate
// (minimum) and an OR gate (maximum), as in the source paper. A width that is
// not a power of two is padded with 0s up to the next power of two P; the pad
// bits sort to the bottom and the top W bits of the result are returned.
// Each comparator level is written as one vector expression: the partner bit
// is brought over by a shift, AND gives the minimum, OR the maximum, and two
// constant masks say which member of a pair a bit is and which direction its
// block sorts in. Combinational; log2(P)*(log2(P)+1)/2 comparator levels.
module bsn_sorter #(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0] din,   // unsorted bits
  output logic [W-1:0] dout   // sorted: dout[W-1 -: k] = 1 for k ones
);
  localparam int unsigned LOG = (W < 2) ? 1 : $clog2(W);
  localparam int unsigned P   = 1 << LOG;

  typedef logic [P-1:0] vec_t;

  // Positions whose index has bit b set.
  function automatic vec_t bit_mask(int unsigned b);
    vec_t m;
    for (int unsigned i = 0; i < P; i++) m[i] = ((i >> b) & 1) == 1;
    return m;
  endfunction

  // MASK[b] = bit_mask(b) for b < LOG; MASK[LOG] = 0 (last merge sorts up).
  function automatic vec_t [LOG:0] mask_tab();
    vec_t [LOG:0] t;
    for (int unsigned b = 0; b <= LOG; b++) t[b] = (b == LOG) ? '0 : bit_mask(b);
    return t;
  endfunction

  localparam vec_t [LOG:0] MASK = mask_tab();

  vec_t v, up, dn, hi, dsc;

  // Level (k, j): merge blocks of 2^k bits, compare bit i with bit i + 2^(j-1).
  // hi marks the upper member of each pair, dsc the blocks sorting downwards.
  always_comb begin
    v = {{(P - W){1'b0}}, din};
    for (int unsigned k = 1; k <= LOG; k++) begin
      for (int unsigned j = k; j > 0; j--) begin
        hi  = MASK[j-1];
        dsc = MASK[k];
        up  = v >> (1 << (j - 1));   // partner of a lower member
        dn  = v << (1 << (j - 1));   // partner of an upper member
        v   = (~hi & ~dsc & (v & up)) | (~hi & dsc & (v | up))
            | ( hi & ~dsc & (v | dn)) | ( hi & dsc & (v & dn));
      end
    end
    dout = v[P-1 -: W];
  end
endmodule
