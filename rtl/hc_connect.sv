// hc_connect -- the H_C connection network ("H_C connect" / bi-directional
// multiplexer) between the variable-node group and the check-node units.
//
// The N_CA check nodes are processed in N_CA/N_CI rounds by N_CI check-node units;
// in round r unit u serves check node j = r*N_CI + u. Edge k of that check node
// connects to VN hc_edge_vn(j,k) with coefficient h = hc_edge_coef(j,k) (see
// nbldpc_pkg). Because the code is fixed, each CN input is a multiplexer of
// N_CA/N_CI constant choices selected by the round number, not a general crossbar.
//
// VN -> CN: the CN sees the product z = h*x of the VN symbol x, so element z of the
//   CN input is element z*h^-1 of the VN's temporal LLV group.
// CN -> VN: element x of the LLV' group written back to the VN is element x*h of the
//   CN output. It lands in slot hc_edge_slot(k) of the VN.
// For GF(3) h^-1 = h and both directions reduce to the index map LLV[k] <- LLV[k*h]
// that the paper gives.
//
// Purely combinational. Port arrays are flattened: index u*D_C + k.
module hc_connect
  import nbldpc_pkg::*;
#(
  parameter int unsigned N_VA = 288,
  parameter int unsigned N_CA = 32,
  parameter int unsigned N_CI = 1,
  parameter int unsigned D_V  = 2,
  localparam int unsigned N_DATA  = N_VA - N_CA,
  localparam int unsigned D_C     = 2 * (N_DATA / N_CA) + 2,
  localparam int unsigned N_ROUND = N_CA / N_CI,
  localparam int unsigned RW      = (N_ROUND > 1) ? $clog2(N_ROUND) : 1,
  localparam int unsigned NW      = N_CI * D_C,
  localparam int unsigned VW      = $clog2(N_VA),
  localparam int unsigned SW      = (D_V > 1) ? $clog2(D_V) : 1
) (
  input  logic [RW-1:0] round_i,
  input  llv_vec_t      temp_i     [N_VA],
  output llv_vec_t      cn_in_o    [NW],
  input  llv_vec_t      cn_out_i   [NW],
  input  logic          wr_valid_i,
  output logic          wr_en_o    [NW],
  output logic [VW-1:0] wr_vn_o    [NW],
  output logic [SW-1:0] wr_slot_o  [NW],
  output llv_vec_t      wr_llv_o   [NW]
);

  for (genvar u = 0; u < N_CI; u++) begin : g_unit
    for (genvar k = 0; k < D_C; k++) begin : g_edge
      always_comb begin
        int unsigned j, vn, h, hinv;
        cn_in_o[u*D_C+k]   = '0;
        wr_llv_o[u*D_C+k]  = '0;
        wr_vn_o[u*D_C+k]   = '0;
        wr_slot_o[u*D_C+k] = SW'(hc_edge_slot(k, N_CA, N_DATA));
        wr_en_o[u*D_C+k]   = wr_valid_i;
        for (int unsigned r = 0; r < N_ROUND; r++) begin
          j    = r * N_CI + u;
          vn   = hc_edge_vn(j, k, N_CA, N_DATA);
          h    = hc_edge_coef(j, k, N_CA, N_DATA);
          hinv = gf_inv(h);
          if (int'(round_i) == int'(r)) begin
            wr_vn_o[u*D_C+k] = VW'(vn);
            for (int unsigned z = 0; z < P; z++) begin
              cn_in_o[u*D_C+k][z]  = temp_i[vn][gf_mul(z, hinv)];
              wr_llv_o[u*D_C+k][z] = cn_out_i[u*D_C+k][gf_mul(z, h)];
            end
          end
        end
      end
    end
  end

endmodule
