// nbldpc_encoder -- check-symbol generation (redundancy generation with H_G).
//
// For a word of N_DATA data symbols w the stored word is w' = w * H_G = [w | c]:
// the data symbols unchanged followed by N_CA check symbols c chosen so that every
// check node of H_C sums to zero over GF(P) (w' * H_C^T = 0). With the staircase check
// part of H_C (nbldpc_pkg), check node j involves check symbols c_j (coefficient a_j)
// and c_{j-1} (coefficient b_{j-1}, cyclic), so
//     a_j*c_j + b_{j-1}*c_{j-1} = s_j,   s_j = -(sum of data terms of check j).
// Writing c_j = alpha_j + beta_j*c_0 and closing the cycle at check 0 gives c_0, then
// all c_j: a linear chain of N_CA GF(P) steps instead of a stored generator matrix.
//
// Purely combinational. Follows the paper: systematic code [I | check generator],
// check symbols from linear GF(P) arithmetic. Own choice: the recurrence, which
// follows from this design's H_C structure.
module nbldpc_encoder
  import nbldpc_pkg::*;
#(
  parameter int unsigned N_VA = 288,
  parameter int unsigned N_CA = 32,
  localparam int unsigned N_DATA = N_VA - N_CA,
  localparam int unsigned D_C    = 2 * (N_DATA / N_CA) + 2
) (
  input  sym_t data_i  [N_DATA],
  output sym_t check_o [N_CA]
);

  always_comb begin
    int unsigned s [N_CA];
    int unsigned alpha [N_CA];
    int unsigned beta  [N_CA];
    int unsigned a, b, ainv, den, num, c0;
    // syndromes of the data part, negated
    for (int unsigned j = 0; j < N_CA; j++) begin
      s[j] = 0;
      for (int unsigned k = 0; k < D_C - 2; k++)
        s[j] = gf_add(s[j], gf_mul(hc_edge_coef(j, k, N_CA, N_DATA),
                                   int'(data_i[hc_edge_vn(j, k, N_CA, N_DATA)])));
      s[j] = gf_sub(0, s[j]);
    end
    alpha[0] = 0;
    beta[0]  = 1;
    for (int unsigned j = 1; j < N_CA; j++) begin
      a    = hc_coef(N_DATA + j, 0, N_CA, N_DATA);
      b    = hc_coef(N_DATA + j - 1, 1, N_CA, N_DATA);
      ainv = gf_inv(a);
      alpha[j] = gf_mul(ainv, gf_sub(s[j], gf_mul(b, alpha[j-1])));
      beta[j]  = gf_mul(ainv, gf_sub(0, gf_mul(b, beta[j-1])));
    end
    a   = hc_coef(N_DATA, 0, N_CA, N_DATA);
    b   = hc_coef(N_DATA + N_CA - 1, 1, N_CA, N_DATA);
    den = gf_add(a, gf_mul(b, beta[N_CA-1]));
    num = gf_sub(s[0], gf_mul(b, alpha[N_CA-1]));
    c0  = gf_mul(num, gf_inv(den));
    for (int unsigned j = 0; j < N_CA; j++)
      check_o[j] = sym_t'(gf_add(alpha[j], gf_mul(beta[j], c0)));
  end

endmodule
