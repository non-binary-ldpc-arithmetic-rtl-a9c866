// nbldpc_pkg -- shared types, GF(p) arithmetic and the hard-wired check matrix H_C
// of the non-binary LDPC (NB-LDPC) arithmetic error correction for PIM.
//
// Arithmetic is over GF(P) with P prime (P = 3 in the prototype). A symbol is an
// element 0..P-1. A logarithmic likelihood value group (LLV vector) holds one signed
// LLV per element; larger means more likely.
//
// The check matrix H_C is not a stored table: every VN/CN connection and every
// non-zero coefficient is a closed-form function of the node indices, so that the
// multiplexers it controls are fixed wiring once the code size is fixed. The code has
// N_CA check nodes and N_VA = N_DATA + N_CA variable nodes (symbols). Each VN has
// degree 2, each CN degree D_C = 2*N_DATA/N_CA + 2 (32 CNs, 288 VNs, D_C = 18 in the
// prototype configuration). Data VN i = g*N_CA + r (group g, row r) joins CN r
// (slot 0) and CN (r + 2 + g) mod N_CA (slot 1); distinct group shifts keep the
// Tanner graph free of 4-cycles. Check VN N_DATA+t joins CN t (slot 0) and CN t+1
// (slot 1, cyclic), a staircase that makes encoding a short recurrence. The real
// construction of the code (PEG / PCEG) is not published; this structure is this
// design's own, with the degrees and sizes chosen to match the prototype figures.
// Coefficients are pseudo-random non-zero elements, as the text describes.
package nbldpc_pkg;

  // Galois field order (prime).
  localparam int unsigned P      = 3;
  localparam int unsigned SYM_W  = $clog2(P);
  // LLV word width (signed, saturating).
  localparam int unsigned LLV_W  = 8;
  // Received (integer) value width for one codeword symbol.
  localparam int unsigned Y_W    = 4;
  // ADC output code width (2.5-bit flash ADC, codes 0..4 used).
  localparam int unsigned ADC_W  = 3;

  localparam int LLV_MAX = (1 <<< (LLV_W - 1)) - 1;
  localparam int LLV_MIN = -(1 <<< (LLV_W - 1));

  typedef logic [SYM_W-1:0]        sym_t;
  typedef logic signed [LLV_W-1:0] llv_t;
  typedef llv_t [P-1:0]            llv_vec_t;
  typedef logic [Y_W-1:0]          yval_t;

  // Operating mode: conventional memory read or PIM MAC.
  typedef enum logic {MODE_MEM = 1'b0, MODE_PIM = 1'b1} mode_e;

  // ---------------- GF(P) arithmetic ----------------
  function automatic int unsigned gf_add(int unsigned a, int unsigned b);
    return (a + b) % P;
  endfunction

  function automatic int unsigned gf_sub(int unsigned a, int unsigned b);
    return (a + P - (b % P)) % P;
  endfunction

  function automatic int unsigned gf_mul(int unsigned a, int unsigned b);
    return (a * b) % P;
  endfunction

  function automatic int unsigned gf_inv(int unsigned a);
    int unsigned r;
    r = 0;
    for (int unsigned x = 1; x < P; x++)
      if (((a * x) % P) == 1) r = x;
    return r;
  endfunction

  // Saturate an integer to the LLV range.
  function automatic llv_t llv_sat(int v);
    if (v > LLV_MAX) return llv_t'(LLV_MAX);
    if (v < LLV_MIN) return llv_t'(LLV_MIN);
    return llv_t'(v);
  endfunction

  // Index of the largest LLV; the lowest element wins a tie.
  function automatic sym_t llv_argmax(llv_vec_t v);
    sym_t best;
    best = '0;
    for (int unsigned k = 1; k < P; k++)
      if (v[k] > v[best]) best = sym_t'(k);
    return best;
  endfunction

  // ---------------- H_C structure ----------------
  // Group shift of data group g (see header).
  function automatic int unsigned hc_shift(int unsigned g);
    return 2 + g;
  endfunction

  // VN index on edge k of CN j.
  function automatic int unsigned hc_edge_vn(int unsigned j, int unsigned k,
                                             int unsigned n_ca, int unsigned n_data);
    int unsigned g_n;
    g_n = n_data / n_ca;
    if (k < g_n)
      return k * n_ca + j;
    else if (k < 2 * g_n)
      return (k - g_n) * n_ca + ((j + n_ca - (hc_shift(k - g_n) % n_ca)) % n_ca);
    else if (k == 2 * g_n)
      return n_data + j;
    else
      return n_data + ((j + n_ca - 1) % n_ca);
  endfunction

  // Slot (0 or 1) that edge k of CN j occupies at its VN.
  function automatic int unsigned hc_edge_slot(int unsigned k,
                                               int unsigned n_ca, int unsigned n_data);
    int unsigned g_n;
    g_n = n_data / n_ca;
    if (k < g_n)            return 0;
    else if (k < 2 * g_n)   return 1;
    else if (k == 2 * g_n)  return 0;
    else                    return 1;
  endfunction

  // Non-zero coefficient H_C of VN i on its slot s.
  function automatic int unsigned hc_coef(int unsigned i, int unsigned s,
                                          int unsigned n_ca, int unsigned n_data);
    if (i < n_data)
      return 1 + ((i * 7 + s * 5 + i / n_ca + (i >> 2)) % (P - 1));
    else if (s == 0)
      return 1;
    else if ((i - n_data) == n_ca - 1 && (n_ca % 2) == 0)
      return P - 1;   // makes the cyclic staircase invertible for even n_ca
    else
      return 1;
  endfunction

  // Coefficient on edge k of CN j.
  function automatic int unsigned hc_edge_coef(int unsigned j, int unsigned k,
                                               int unsigned n_ca, int unsigned n_data);
    return hc_coef(hc_edge_vn(j, k, n_ca, n_data), hc_edge_slot(k, n_ca, n_data),
                   n_ca, n_data);
  endfunction

endpackage
