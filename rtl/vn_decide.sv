// vn_decide -- decision and interpretation of one variable node ("LLV Comp." and
// "Find Nearest").
//
// The GF(P) element with the largest updated LLV is the decoded symbol (lowest
// element on a tie). The decoded symbol is then interpreted back into an integer
// result: the value v in 0..ymax with v mod P equal to the symbol that lies closest
// (1-D Manhattan distance) to the received value y. For a correctly received value
// this is y itself; for a corrupted one it is the nearest value consistent with the
// corrected symbol. On equal distance the smaller value is taken (own choice).
//
// Purely combinational.
module vn_decide
  import nbldpc_pkg::*;
(
  input  llv_vec_t llv_i,   // updated (temporal) LLV group
  input  yval_t    y_i,     // received value
  input  yval_t    ymax_i,  // largest possible value
  output sym_t     sym_o,   // decoded GF symbol
  output yval_t    val_o    // interpreted (corrected) integer result
);

  always_comb begin
    int unsigned r, dn, up;
    sym_t s;
    s     = llv_argmax(llv_i);
    sym_o = s;
    r     = int'(y_i) % P;
    dn    = (r + P - int'(s)) % P;
    up    = (int'(s) + P - r) % P;
    val_o = y_i;
    if (int'(y_i) >= int'(dn) &&
        !(int'(y_i) + int'(up) <= int'(ymax_i) && up < dn))
      val_o = yval_t'(int'(y_i) - int'(dn));
    else if (int'(y_i) + int'(up) <= int'(ymax_i))
      val_o = yval_t'(int'(y_i) + int'(up));
  end

endmodule
