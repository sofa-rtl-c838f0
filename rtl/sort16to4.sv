// sort16to4: fully parallel 16-to-4 bitonic top-4 selector, the sorting core
// of a SADS line (paper Sec. IV-C1, Fig. 13).
//
// Stage 1 (the figure's "Parallel BM-2" and "Parallel BM-4") sorts each of
// the four groups of four inputs in descending order with a 4-input bitonic
// network. Two merge levels follow: two sorted 4-lists A and B are combined
// by max(A[i], B[3-i]), which keeps the four largest as a bitonic sequence,
// and a half cleaner (distance 2, then distance 1) orders them. As in the
// paper, only the top-1 and top-2 positions need an exact order (they steer
// SU-FA); the final comparator between positions 3 and 4 is removed, so
// out[2] and out[3] are the 3rd and 4th largest in either order.
// Candidates carry a valid bit and their key index; an invalid (clipped)
// candidate loses every comparison. Combinational.
module sort16to4
  import sofa_pkg::*;
(
  input  cand_t in  [16],
  output cand_t out [4]
);
  typedef cand_t q4_t [4];

  // compare-exchange: larger to the lower position
  function automatic void cx(ref cand_t a, ref cand_t b);
    cand_t t;
    if (!cand_ge(a, b)) begin
      t = a; a = b; b = t;
    end
  endfunction

  function automatic q4_t sort4(input q4_t x);
    q4_t y;
    y = x;
    // BM-2: pairs in opposite directions form a bitonic 4-sequence
    cx(y[0], y[1]);
    cx(y[3], y[2]);
    // BM-4: bitonic merge
    cx(y[0], y[2]);
    cx(y[1], y[3]);
    cx(y[0], y[1]);
    cx(y[2], y[3]);
    return y;
  endfunction

  // top four of two descending lists; full = 0 drops the last comparator
  function automatic q4_t merge4(input q4_t a, input q4_t b, input logic full);
    q4_t y;
    for (int i = 0; i < 4; i++) y[i] = cand_ge(a[i], b[3-i]) ? a[i] : b[3-i];
    cx(y[0], y[2]);
    cx(y[1], y[3]);
    cx(y[0], y[1]);
    if (full) cx(y[2], y[3]);
    return y;
  endfunction

  always_comb begin
    q4_t g [4];
    q4_t m01, m23, f;
    for (int k = 0; k < 4; k++) begin
      q4_t t;
      for (int i = 0; i < 4; i++) t[i] = in[4*k+i];
      g[k] = sort4(t);
    end
    m01 = merge4(g[0], g[1], 1'b1);
    m23 = merge4(g[2], g[3], 1'b1);
    f   = merge4(m01, m23, 1'b0);
    for (int i = 0; i < 4; i++) out[i] = f[i];
  end
endmodule
