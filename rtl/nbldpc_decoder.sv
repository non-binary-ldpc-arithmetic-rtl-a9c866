// nbldpc_decoder -- iterative non-binary LDPC decoder over GF(P) with its control
// finite-state machine.
//
// A codeword of N_VA integer symbols (received PIM MAC results or memory read values,
// with the largest value each can take) is decoded as follows:
//   INIT   N_VA/N_VI cycles: the VN group computes the prior LLVs by 1-D Manhattan
//          distance; they are the temporal LLVs of iteration 0.
//   CN     N_CA/N_CI rounds: the N_CI check-node units take their D_C LLV groups
//          through the H_C multiplexers, run forward-backward propagation and error
//          detection, and the LLV' groups are written back into the VN slots.
//   check  if every check node passed, the decoded word is output; if the iteration
//          limit MAX_ITER is reached, it is output flagged as not corrected.
//   VN     N_VA/N_VI cycles: temporal = norm(prior + returned LLV'), then CN again.
// The first CN pass is the error detection of the unified flow: an error-free word
// leaves after one pass with no VN update.
//
// Interface: cw_valid_i/cw_ready_o handshake; cw_y_i/cw_ymax_i must hold while
// cw_valid_i is high and are taken over INIT (cw_ready_o pulses on the last INIT
// cycle). out_valid_o pulses once per codeword; out_val_o/out_sym_o hold the corrected
// word until the next codeword is taken, out_ok_o tells whether all checks passed and
// out_iter_o how many VN updates were made.
// Timing per pass: CN round = 1 start cycle + cn_unit latency (27 for D_C = 18), so
// one iteration of the prototype code (32 rounds, N_CI = 1) takes 32*28 + N_VA/N_VI
// cycles.
//
// Follows the paper: the VN/CN loop and stopping rule of the decoding flow, N_VI VN
// lanes and N_CI CN units reused over time, H_C as fixed multiplexers. Own choices: the
// FSM encoding and schedule, the handshake, MAX_ITER (the limit is not given).
module nbldpc_decoder
  import nbldpc_pkg::*;
#(
  parameter int unsigned N_VA     = 288,
  parameter int unsigned N_VI     = 288,
  parameter int unsigned N_CA     = 32,
  parameter int unsigned N_CI     = 1,
  parameter int unsigned D_V      = 2,
  parameter int unsigned MAX_ITER = 10,
  localparam int unsigned N_DATA  = N_VA - N_CA,
  localparam int unsigned D_C     = 2 * (N_DATA / N_CA) + 2,
  localparam int unsigned N_CHUNK = N_VA / N_VI,
  localparam int unsigned CHW     = (N_CHUNK > 1) ? $clog2(N_CHUNK) : 1,
  localparam int unsigned N_ROUND = N_CA / N_CI,
  localparam int unsigned RW      = (N_ROUND > 1) ? $clog2(N_ROUND) : 1,
  localparam int unsigned NW      = N_CI * D_C,
  localparam int unsigned VW      = $clog2(N_VA),
  localparam int unsigned SW      = (D_V > 1) ? $clog2(D_V) : 1,
  localparam int unsigned IW      = $clog2(MAX_ITER + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cw_valid_i,
  output logic          cw_ready_o,
  input  yval_t         cw_y_i    [N_VA],
  input  yval_t         cw_ymax_i [N_VA],
  output logic          out_valid_o,
  output logic          out_ok_o,
  output logic [IW-1:0] out_iter_o,
  output yval_t         out_val_o [N_VA],
  output sym_t          out_sym_o [N_VA],
  output logic          busy_o
);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_CN_START, S_CN_WAIT, S_VN} state_e;

  state_e          state_q;
  logic [CHW-1:0]  chunk_q;
  logic [RW-1:0]   round_q;
  logic [IW-1:0]   iter_q;
  logic            all_pass_q;

  // ---------------- VN group ----------------
  yval_t    lane_y    [N_VI];
  yval_t    lane_ymax [N_VI];
  llv_vec_t temp      [N_VA];
  logic     wr_en     [NW];
  logic [VW-1:0] wr_vn [NW];
  logic [SW-1:0] wr_slot [NW];
  llv_vec_t wr_llv    [NW];

  always_comb
    for (int l = 0; l < N_VI; l++) begin
      lane_y[l]    = cw_y_i[int'(chunk_q) * N_VI + l];
      lane_ymax[l] = cw_ymax_i[int'(chunk_q) * N_VI + l];
    end

  vn_group #(.N_VA(N_VA), .N_VI(N_VI), .D_V(D_V), .NW(NW)) u_vn (
    .clk, .rst_n,
    .init_i      (state_q == S_INIT),
    .init_chunk_i(chunk_q),
    .init_y_i    (lane_y),
    .init_ymax_i (lane_ymax),
    .upd_i       (state_q == S_VN),
    .upd_chunk_i (chunk_q),
    .wr_en_i     (wr_en),
    .wr_vn_i     (wr_vn),
    .wr_slot_i   (wr_slot),
    .wr_llv_i    (wr_llv),
    .temp_o      (temp),
    .sym_o       (out_sym_o),
    .val_o       (out_val_o)
  );

  // ---------------- H_C connect and CN group ----------------
  llv_vec_t cn_in  [NW];
  llv_vec_t cn_out [NW];
  logic     cn_done [N_CI];
  logic     cn_pass [N_CI];
  logic     cn_busy [N_CI];
  logic     cn_start;
  logic     round_done, round_pass;

  assign cn_start = (state_q == S_CN_START);

  hc_connect #(.N_VA(N_VA), .N_CA(N_CA), .N_CI(N_CI), .D_V(D_V)) u_hc (
    .round_i   (round_q),
    .temp_i    (temp),
    .cn_in_o   (cn_in),
    .cn_out_i  (cn_out),
    .wr_valid_i(round_done),
    .wr_en_o   (wr_en),
    .wr_vn_o   (wr_vn),
    .wr_slot_o (wr_slot),
    .wr_llv_o  (wr_llv)
  );

  for (genvar u = 0; u < N_CI; u++) begin : g_cn
    llv_vec_t u_in  [D_C];
    llv_vec_t u_out [D_C];
    for (genvar k = 0; k < D_C; k++) begin : g_k
      assign u_in[k]          = cn_in[u*D_C+k];
      assign cn_out[u*D_C+k]  = u_out[k];
    end
    cn_unit #(.D_C(D_C)) u_cn (
      .clk, .rst_n,
      .start_i  (cn_start),
      .in_llv_i (u_in),
      .busy_o   (cn_busy[u]),
      .done_o   (cn_done[u]),
      .pass_o   (cn_pass[u]),
      .out_llv_o(u_out)
    );
  end

  // all units start together and have equal latency
  always_comb begin
    round_done = cn_done[0];
    round_pass = 1'b1;
    for (int u = 0; u < N_CI; u++) round_pass = round_pass & cn_pass[u];
  end

  // ---------------- control FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      chunk_q     <= '0;
      round_q     <= '0;
      iter_q      <= '0;
      all_pass_q  <= 1'b0;
      out_valid_o <= 1'b0;
      out_ok_o    <= 1'b0;
      out_iter_o  <= '0;
    end else begin
      out_valid_o <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (cw_valid_i) begin
            chunk_q <= '0;
            state_q <= S_INIT;
          end
        end
        S_INIT: begin
          if (int'(chunk_q) == N_CHUNK - 1) begin
            chunk_q    <= '0;
            round_q    <= '0;
            iter_q     <= '0;
            all_pass_q <= 1'b1;
            state_q    <= S_CN_START;
          end else begin
            chunk_q <= chunk_q + CHW'(1);
          end
        end
        S_CN_START: state_q <= S_CN_WAIT;
        S_CN_WAIT: begin
          if (round_done) begin
            if (int'(round_q) == N_ROUND - 1) begin
              round_q <= '0;
              if ((all_pass_q && round_pass) || int'(iter_q) == MAX_ITER) begin
                out_valid_o <= 1'b1;
                out_ok_o    <= all_pass_q && round_pass;
                out_iter_o  <= iter_q;
                state_q     <= S_IDLE;
              end else begin
                chunk_q <= '0;
                state_q <= S_VN;
              end
            end else begin
              all_pass_q <= all_pass_q && round_pass;
              round_q    <= round_q + RW'(1);
              state_q    <= S_CN_START;
            end
          end
        end
        S_VN: begin
          if (int'(chunk_q) == N_CHUNK - 1) begin
            chunk_q    <= '0;
            iter_q     <= iter_q + IW'(1);
            all_pass_q <= 1'b1;
            state_q    <= S_CN_START;
          end else begin
            chunk_q <= chunk_q + CHW'(1);
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign cw_ready_o = (state_q == S_INIT) && (int'(chunk_q) == N_CHUNK - 1);
  assign busy_o     = (state_q != S_IDLE);

  // The code structure needs whole chunks, whole rounds and D_C edges per CN.
  initial begin
    assert (N_VA % N_VI == 0) else $error("N_VA must be a multiple of N_VI");
    assert (N_CA % N_CI == 0) else $error("N_CA must be a multiple of N_CI");
    assert (N_DATA % N_CA == 0) else $error("N_VA - N_CA must be a multiple of N_CA");
  end

endmodule
