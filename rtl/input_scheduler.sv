// input_scheduler -- collects the column outputs of the PIM cores into one codeword
// and forms its N_VA symbols for the decoder.
//
// Every accepted beat delivers N_P*C_P column results (one per ADC); beat b fills
// columns b*N_P*C_P .. b*N_P*C_P + N_P*C_P-1 of the codeword buffer, core-major. After
// COLS/(N_P*C_P) beats the buffer holds a codeword of COLS columns:
//   columns 0..N_DATA-1        one data symbol each (binary cells),
//   columns N_DATA + t*SYM_W + b   bit b of check symbol t (a check symbol over GF(3)
//                                  takes two binary cells).
// Data symbol i is the column value itself. Check symbol t is the shift-and-add
// sum_b 2^b * column(b) of its cells, which by linearity is the MAC result of the
// whole check symbol. The largest possible value of each symbol (ymax) depends on
// the mode: in PIM mode a column can reach ADC_MAX (data) or (P-1)*ADC_MAX (check);
// in memory mode one row is read, so 1 (data) or P-1 (check).
//
// Interface: col_valid_i/col_ready_o per beat; cw_valid_o/cw_ready_i for the whole
// codeword, which holds (and blocks new beats) until taken. mode_i is sampled with the
// first beat.
//
// Follows the paper: a buffer that turns N_P*C_P results per cycle into a codeword in
// a predefined order; two cells per check symbol. Own choices: the column order,
// shift-and-add combination of the check cells, single buffering.
module input_scheduler
  import nbldpc_pkg::*;
#(
  parameter int unsigned N_P     = 1,
  parameter int unsigned C_P     = 10,
  parameter int unsigned N_VA    = 288,
  parameter int unsigned N_CA    = 32,
  parameter int unsigned ADC_MAX = 4,
  localparam int unsigned NPCP   = N_P * C_P,
  localparam int unsigned N_DATA = N_VA - N_CA,
  localparam int unsigned COLS   = N_DATA + N_CA * SYM_W,
  localparam int unsigned N_BEAT = (COLS + NPCP - 1) / NPCP,
  localparam int unsigned BW     = $clog2(N_BEAT + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode_i,
  input  logic              col_valid_i,
  output logic              col_ready_o,
  input  logic [ADC_W-1:0]  col_code_i [NPCP],
  output logic              cw_valid_o,
  input  logic              cw_ready_i,
  output yval_t             cw_y_o    [N_VA],
  output yval_t             cw_ymax_o [N_VA]
);

  logic [ADC_W-1:0] buf_q [N_BEAT*NPCP];
  logic [BW-1:0]    beat_q;
  mode_e            mode_q;
  logic             full_q;

  assign col_ready_o = !full_q;
  assign cw_valid_o  = full_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_q <= '0;
      full_q <= 1'b0;
      mode_q <= MODE_MEM;
      for (int c = 0; c < N_BEAT*NPCP; c++) buf_q[c] <= '0;
    end else begin
      if (col_valid_i && col_ready_o) begin
        for (int a = 0; a < NPCP; a++)
          buf_q[int'(beat_q) * NPCP + a] <= col_code_i[a];
        if (beat_q == '0) mode_q <= mode_i;
        if (int'(beat_q) == N_BEAT - 1) begin
          beat_q <= '0;
          full_q <= 1'b1;
        end else begin
          beat_q <= beat_q + BW'(1);
        end
      end
      if (cw_valid_o && cw_ready_i) full_q <= 1'b0;
    end
  end

  always_comb begin
    int unsigned acc;
    for (int unsigned i = 0; i < N_DATA; i++) begin
      cw_y_o[i]    = yval_t'(buf_q[i]);
      cw_ymax_o[i] = (mode_q == MODE_PIM) ? yval_t'(ADC_MAX) : yval_t'(1);
    end
    for (int unsigned t = 0; t < N_CA; t++) begin
      acc = 0;
      for (int unsigned b = 0; b < SYM_W; b++)
        acc = acc + (int'(buf_q[N_DATA + t*SYM_W + b]) << b);
      cw_y_o[N_DATA+t]    = yval_t'(acc);
      cw_ymax_o[N_DATA+t] = (mode_q == MODE_PIM) ? yval_t'((P-1) * ADC_MAX) : yval_t'(P-1);
    end
  end

endmodule
