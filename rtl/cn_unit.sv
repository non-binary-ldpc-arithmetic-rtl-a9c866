// cn_unit -- check-node (CN) processing unit with forward-backward propagation (FBP)
// and error detection.
//
// One unit serves one check node at a time; the decoder reuses it over all check
// nodes of the code (N_CI units for N_CA check nodes). Its D_C input LLV groups
// L[0..D_C-1] arrive already permuted to the CN's view (element k of L[i] is the LLV
// that coefficient * symbol of VN i equals k), so the check reads sum_i L-symbol = 0.
//
//   Step 1, internal propagation (D_C-1 cycles, two fbp_prop modules in parallel):
//     FM[i] = FM[i-1] (+) L[i-1]        forward messages, FM[0] = neutral "0"
//     BM[i] = BM[i-1] (+) L[D_C-i]      backward messages, BM[0] = neutral "0"
//   Step 2, external propagation ((D_C-1)/2+1 cycles, the same two modules):
//     LLV'[i] = reflect(FM[i] (+) BM[D_C-1-i])
//   computed two per cycle (i = t from the front and i = D_C-1-t from the back).
//   LLV'[i] sums every input but L[i], reflected to the value symbol i must take.
//   Error detection: the check passes when the largest element of LLV'[D_C-1] (the
//   reflected last forward message) equals the largest element of the last input
//   group L[D_C-1], i.e. the hard decisions of all D_C symbols add up to 0.
//
// Interface: start_i (one cycle, while busy_o is low) samples in_llv_i. done_o pulses
// for one cycle when out_llv_o and pass_o are valid; they hold until the next start.
// Latency from the start edge to done_o high: 1 + (D_C-1) + ((D_C-1)/2 + 1) cycles,
// 27 for D_C = 18.
//
// Follows the paper: the FM/BM chains, LLV' from FM[i-1] and BM[D_C-i] (1-based),
// max-element comparison of the last forward message with the last input. Own choices:
// two propagation modules and the cycle schedule (the paper gives neither), the
// reflection only on LLV' (see fbp_prop).
module cn_unit
  import nbldpc_pkg::*;
#(
  parameter int unsigned D_C = 18
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start_i,
  input  llv_vec_t in_llv_i  [D_C],
  output logic     busy_o,
  output logic     done_o,
  output logic     pass_o,
  output llv_vec_t out_llv_o [D_C]
);

  localparam int unsigned CW     = $clog2(D_C + 1);
  localparam int unsigned LAST_T = (D_C - 1) / 2;

  typedef enum logic [1:0] {S_IDLE, S_FWD, S_EXT} state_e;

  state_e          state_q;
  logic [CW-1:0]   step_q;
  llv_vec_t        l_q  [D_C];
  llv_vec_t        fm_q [D_C];   // fm_q[0] / bm_q[0] unused: neutral element
  llv_vec_t        bm_q [D_C];

  // propagation module inputs
  llv_vec_t pa_a, pa_b, pb_a, pb_b, pa_o, pb_o;
  logic     pa_ai, pa_bi, pb_ai, pb_bi, refl;

  int unsigned s_i, s_r;   // step and its mirror index
  always_comb begin
    s_i   = int'(step_q);
    s_r   = D_C - 1 - s_i;
    pa_a  = fm_q[0];
    pa_b  = l_q[0];
    pb_a  = bm_q[0];
    pb_b  = l_q[0];
    pa_ai = 1'b0;
    pa_bi = 1'b0;
    pb_ai = 1'b0;
    pb_bi = 1'b0;
    refl  = 1'b0;
    if (state_q == S_FWD) begin
      // step_q = i in 1..D_C-1
      pa_a  = fm_q[s_i - 1];
      pa_ai = (s_i == 1);
      pa_b  = l_q[s_i - 1];
      pb_a  = bm_q[s_i - 1];
      pb_ai = (s_i == 1);
      pb_b  = l_q[D_C - s_i];
    end else begin
      // step_q = t in 0..LAST_T
      refl  = 1'b1;
      pa_a  = fm_q[s_i];
      pa_ai = (s_i == 0);
      pa_b  = bm_q[s_r];
      pa_bi = (s_r == 0);
      pb_a  = fm_q[s_r];
      pb_ai = (s_r == 0);
      pb_b  = bm_q[s_i];
      pb_bi = (s_i == 0);
    end
  end

  fbp_prop u_prop_a (
    .a_i(pa_a), .a_ident_i(pa_ai), .b_i(pa_b), .b_ident_i(pa_bi),
    .reflect_i(refl), .o_o(pa_o)
  );

  fbp_prop u_prop_b (
    .a_i(pb_a), .a_ident_i(pb_ai), .b_i(pb_b), .b_ident_i(pb_bi),
    .reflect_i(refl), .o_o(pb_o)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      step_q  <= '0;
      done_o  <= 1'b0;
      pass_o  <= 1'b0;
      for (int i = 0; i < D_C; i++) begin
        l_q[i]       <= '0;
        fm_q[i]      <= '0;
        bm_q[i]      <= '0;
        out_llv_o[i] <= '0;
      end
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (start_i) begin
            for (int i = 0; i < D_C; i++) l_q[i] <= in_llv_i[i];
            step_q  <= CW'(1);
            state_q <= S_FWD;
          end
        end
        S_FWD: begin
          fm_q[s_i] <= pa_o;
          bm_q[s_i] <= pb_o;
          if (s_i == D_C - 1) begin
            step_q  <= '0;
            state_q <= S_EXT;
          end else begin
            step_q <= step_q + CW'(1);
          end
        end
        S_EXT: begin
          out_llv_o[s_i] <= pa_o;
          out_llv_o[s_r] <= pb_o;
          if (s_i == 0)
            pass_o <= (llv_argmax(pb_o) == llv_argmax(l_q[D_C-1]));
          if (s_i == LAST_T) begin
            done_o  <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            step_q <= step_q + CW'(1);
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != S_IDLE);

  // A new check node must not be started while one is in flight.
  assert property (@(posedge clk) disable iff (!rst_n) start_i |-> !busy_o)
    else $error("cn_unit: start while busy");

endmodule
