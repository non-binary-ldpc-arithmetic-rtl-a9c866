// vn_group -- the variable-node (VN) group: storage and processing of all N_VA
// codeword symbols.
//
// Each VN keeps its received value y and range ymax, its prior LLV group (the prior
// buffer), its temporal LLV group (the one sent to the check nodes) and one LLV' slot
// per check-node connection (D_V slots). N_VI processing lanes serve the N_VA nodes
// in N_VA/N_VI chunks:
//   init_i  : chunk init_chunk_i takes N_VI new symbols; each lane's llv_init computes
//             the prior LLVs, which are stored as prior and as temporal LLVs of
//             iteration 0; the LLV' slots are cleared.
//   upd_i   : chunk upd_chunk_i updates temporal = norm(prior + sum of its D_V
//             LLV' slots), norm subtracting the element-0 LLV (LLV adder, LLV norm.).
//   wr_*    : NW write ports store LLV' groups coming back from the check nodes into
//             the addressed VN slot (several per cycle, never the same slot twice).
// Every VN has its own decision logic (vn_decide): sym_o is the element with the
// largest temporal LLV, val_o the interpreted integer result. temp_o exposes all
// temporal LLVs to the H_C multiplexers. All updates take effect at the clock edge.
//
// Follows the paper: prior buffer, adder of prior and returned LLV', normalisation,
// selection of the largest LLV, nearest-value interpretation. Own choices: slot
// storage of LLV', element-0 normalisation in the VN, a decision unit per VN instead
// of per lane.
module vn_group
  import nbldpc_pkg::*;
#(
  parameter int unsigned N_VA = 288,
  parameter int unsigned N_VI = 288,
  parameter int unsigned D_V  = 2,
  parameter int unsigned NW   = 18,
  localparam int unsigned N_CHUNK = N_VA / N_VI,
  localparam int unsigned CHW  = (N_CHUNK > 1) ? $clog2(N_CHUNK) : 1,
  localparam int unsigned VW   = $clog2(N_VA),
  localparam int unsigned SW   = (D_V > 1) ? $clog2(D_V) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // initialisation
  input  logic            init_i,
  input  logic [CHW-1:0]  init_chunk_i,
  input  yval_t           init_y_i    [N_VI],
  input  yval_t           init_ymax_i [N_VI],
  // temporal LLV update
  input  logic            upd_i,
  input  logic [CHW-1:0]  upd_chunk_i,
  // LLV' write-back from the check nodes
  input  logic            wr_en_i   [NW],
  input  logic [VW-1:0]   wr_vn_i   [NW],
  input  logic [SW-1:0]   wr_slot_i [NW],
  input  llv_vec_t        wr_llv_i  [NW],
  // state and decisions
  output llv_vec_t        temp_o [N_VA],
  output sym_t            sym_o  [N_VA],
  output yval_t           val_o  [N_VA]
);

  llv_vec_t prior_q [N_VA];
  llv_vec_t temp_q  [N_VA];
  llv_vec_t slot_q  [N_VA][D_V];
  yval_t    y_q     [N_VA];
  yval_t    ymax_q  [N_VA];

  // lane datapath
  llv_vec_t lane_prior [N_VI];
  llv_vec_t lane_upd   [N_VI];

  for (genvar l = 0; l < N_VI; l++) begin : g_lane
    llv_init u_init (
      .y_i   (init_y_i[l]),
      .ymax_i(init_ymax_i[l]),
      .llv_o (lane_prior[l])
    );

    // LLV adder and normalisation for VN (upd_chunk_i * N_VI + l)
    always_comb begin
      int unsigned v;
      int          acc [P];
      v = int'(upd_chunk_i) * N_VI + l;
      for (int unsigned k = 0; k < P; k++) begin
        acc[k] = int'(prior_q[v][k]);
        for (int unsigned s = 0; s < D_V; s++)
          acc[k] = acc[k] + int'(slot_q[v][s][k]);
      end
      for (int unsigned k = 0; k < P; k++)
        lane_upd[l][k] = llv_sat(acc[k] - acc[0]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < N_VA; v++) begin
        prior_q[v] <= '0;
        temp_q[v]  <= '0;
        y_q[v]     <= '0;
        ymax_q[v]  <= '0;
        for (int s = 0; s < D_V; s++) slot_q[v][s] <= '0;
      end
    end else begin
      if (init_i) begin
        for (int l = 0; l < N_VI; l++) begin
          prior_q[int'(init_chunk_i) * N_VI + l] <= lane_prior[l];
          temp_q [int'(init_chunk_i) * N_VI + l] <= lane_prior[l];
          y_q    [int'(init_chunk_i) * N_VI + l] <= init_y_i[l];
          ymax_q [int'(init_chunk_i) * N_VI + l] <= init_ymax_i[l];
          for (int s = 0; s < D_V; s++)
            slot_q[int'(init_chunk_i) * N_VI + l][s] <= '0;
        end
      end
      if (upd_i) begin
        for (int l = 0; l < N_VI; l++)
          temp_q[int'(upd_chunk_i) * N_VI + l] <= lane_upd[l];
      end
      for (int w = 0; w < NW; w++)
        if (wr_en_i[w]) slot_q[wr_vn_i[w]][wr_slot_i[w]] <= wr_llv_i[w];
    end
  end

  for (genvar v = 0; v < N_VA; v++) begin : g_dec
    assign temp_o[v] = temp_q[v];
    vn_decide u_dec (
      .llv_i (temp_q[v]),
      .y_i   (y_q[v]),
      .ymax_i(ymax_q[v]),
      .sym_o (sym_o[v]),
      .val_o (val_o[v])
    );
  end

endmodule
