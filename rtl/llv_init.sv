// llv_init -- LLV initializer of one variable node (VN).
//
// A received codeword symbol is an integer y, the value an ADC (PIM mode) or a sense
// amplifier (memory mode) produced, in the range 0..ymax of results the column can
// yield. For every GF(P) element k the prior LLV is the negated one-dimensional
// Manhattan distance from y to the closest possible result v (0 <= v <= ymax) with
// v mod P == k. This is the simplified log-likelihood of the paper: with a per-level
// error probability BER, P(v) ~ BER^|y-v|, and the logarithm to base 1/BER gives -|y-v|.
// An element that no possible result maps to (e.g. element 2 of a binary data cell in
// memory mode) is scored by its nearest candidate outside the range, so that every
// LLV stays a small finite number and later normalisation cannot saturate.
//
// The closest candidate of element k is either y - ((y-k) mod P) below or
// y + ((k-y) mod P) above, so no search over the range is needed.
//
// Purely combinational; one instance per VN processing lane.
// Follows the paper: Manhattan-distance LLVs. Own choice: the offset (LLV of the
// most likely element is 0, others negative; the figure example shows a positive
// offset, which cancels in every later step).
module llv_init
  import nbldpc_pkg::*;
(
  input  yval_t    y_i,     // received value
  input  yval_t    ymax_i,  // largest value this symbol can take
  output llv_vec_t llv_o    // prior LLV per GF element
);

  always_comb begin
    int unsigned r, dn, up, d;
    logic        ok;
    r = int'(y_i) % P;
    for (int unsigned k = 0; k < P; k++) begin
      dn = (r + P - k) % P;          // distance to the candidate below
      up = (k + P - r) % P;          // distance to the candidate above
      ok = 1'b0;
      d  = 0;
      if (int'(y_i) >= int'(dn)) begin
        ok = 1'b1;
        d  = dn;
      end
      if (int'(y_i) + int'(up) <= int'(ymax_i) && (!ok || up < d)) begin
        ok = 1'b1;
        d  = up;
      end
      if (!ok) d = (dn < up) ? dn : up;   // no possible result: nearest one outside
      llv_o[k] = llv_sat(-int'(d));
    end
  end

endmodule
