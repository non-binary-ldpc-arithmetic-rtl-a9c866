// fbp_prop -- propagation module of the forward-backward propagation (FBP) inside a
// check node.
//
// It "adds" two LLV groups A and B in the log domain: the result for element k is the
// largest LLV_A[k-j] + LLV_B[j] over all j in GF(P), the max-log form of the
// probability of a sum of two symbols. The result is normalised by subtracting its
// LLV of element 0 from every element, so that messages do not grow from step to
// step. With reflect_i set, element k of the output takes the value of element -k
// (the "reverse reflection"), which turns the distribution of a partial sum S into
// that of -S, the value the excluded symbol must take for the check sum to be 0.
//
// a_ident_i / b_ident_i mark an input as the neutral group ("0" in the FBP chain:
// the sum of no symbols, which is 0 with certainty); the other input then passes
// unchanged through normalisation and reflection. All sums saturate to LLV_W bits.
//
// Purely combinational. Follows the paper: Eq. 8, element-0 normalisation, reverse
// reflection. The text applies the reflection to every FM/BM, the figure places it on
// the LLV' path; this design reflects only LLV' (reflect_i), which keeps the forward
// and backward chains plain partial sums.
module fbp_prop
  import nbldpc_pkg::*;
(
  input  llv_vec_t a_i,
  input  logic     a_ident_i,
  input  llv_vec_t b_i,
  input  logic     b_ident_i,
  input  logic     reflect_i,
  output llv_vec_t o_o
);

  llv_vec_t sum_v, norm_v;

  always_comb begin
    int best, s;
    best = LLV_MIN;
    s    = 0;
    for (int unsigned k = 0; k < P; k++) begin
      if (a_ident_i) begin
        sum_v[k] = b_i[k];
      end else if (b_ident_i) begin
        sum_v[k] = a_i[k];
      end else begin
        best = LLV_MIN;
        for (int unsigned j = 0; j < P; j++) begin
          s = int'(a_i[gf_sub(k, j)]) + int'(b_i[j]);
          if (s > best) best = s;
        end
        sum_v[k] = llv_sat(best);
      end
    end
    for (int unsigned k = 0; k < P; k++)
      norm_v[k] = llv_sat(int'(sum_v[k]) - int'(sum_v[0]));
    for (int unsigned k = 0; k < P; k++)
      o_o[k] = reflect_i ? norm_v[gf_sub(0, k)] : norm_v[k];
  end

endmodule
