// tb_ref_pkg: reference arithmetic shared by the testbenches.
//
// Works on counts of 1s rather than on bit vectors: a sorted stream is fully
// described by how many 1s it holds, and a sub-sampling block that keeps the
// bit at depth clip + k*stride + (stride-1)/2 for k < (L-2*clip)/stride keeps
// exactly those samples whose depth is below the count.
package tb_ref_pkg;

  function automatic int ss_count(int ones, int in_w, int clip, int stride);
    int s, off, n, cnt;
    s   = (stride == 0) ? 1 : stride;
    off = (s - 1) / 2;
    n   = (2 * clip >= in_w) ? 0 : (in_w - 2 * clip) / s;
    cnt = 0;
    for (int k = 0; k < n; k++) if (clip + k * s + off < ones) cnt++;
    return cnt;
  endfunction

  // Ternary value of a 2-bit thermometer code.
  function automatic int tern(logic [1:0] c);
    return (c == 2'b11) ? 1 : (c == 2'b00) ? -1 : 0;
  endfunction

  // Repeated halving with rounding towards +infinity.
  function automatic int ceil_half(int v, int n);
    int r = v;
    for (int i = 0; i < n; i++) r = (r >= 0) ? (r + 1) / 2 : -((-r) / 2);
    return r;
  endfunction

endpackage
