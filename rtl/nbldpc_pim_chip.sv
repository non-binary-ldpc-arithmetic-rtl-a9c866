// nbldpc_pim_chip -- top level of the PIM prototype with monolithic NB-LDPC error
// correction: one RRAM PIM core (N_P = 1) whose ten ADC outputs feed an NB-LDPC
// decoder over GF(3).
//
// Write path: wr_data_i holds the N_DATA binary data cells of a row. The encoder
// adds the N_CA check symbols (two cells each), and the COLS = N_DATA + 2*N_CA cells
// are programmed into row wr_row_i, so every row is a codeword and, by linearity,
// so is every sum of rows.
// Compute path: start_i applies the word-line vector wl_i (several rows in PIM mode,
// one row in memory mode, mode_i). The core streams its column results C_P per
// cycle into the input scheduler, which forms the codeword; the decoder detects and
// corrects errors and presents the corrected data results on out_val_o.
// Debug path: with dbg_en_i set, the scheduler takes beats from dbg_valid_i /
// dbg_code_i instead of the core (the debug codeword input of the prototype), so any
// test codeword can be decoded.
// The analog core is a behavioural model (pim_core); the off-chip I2C link that
// loads debug codewords is not part of this RTL, its beats arrive on dbg_*.
//
// Timing: a codeword takes COLS/C_P = 32 beats to collect, N_VA/N_VI init cycles and
// 32*28 cycles per decoding pass; out_valid_o pulses when it is done.
module nbldpc_pim_chip
  import nbldpc_pkg::*;
#(
  parameter int unsigned ROWS     = 256,
  parameter int unsigned N_VA     = 288,
  parameter int unsigned N_VI     = 288,
  parameter int unsigned N_CA     = 32,
  parameter int unsigned N_CI     = 1,
  parameter int unsigned D_V      = 2,
  parameter int unsigned C_P      = 10,
  parameter int unsigned ADC_MAX  = 4,
  parameter int unsigned MAX_ITER = 10,
  localparam int unsigned N_DATA  = N_VA - N_CA,
  localparam int unsigned COLS    = N_DATA + N_CA * SYM_W,
  localparam int unsigned RAW     = $clog2(ROWS),
  localparam int unsigned CAW     = $clog2(COLS),
  localparam int unsigned IW      = $clog2(MAX_ITER + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode_i,
  // weight programming
  input  logic              wr_en_i,
  input  logic [RAW-1:0]    wr_row_i,
  input  logic [N_DATA-1:0] wr_data_i,
  // computation
  input  logic              start_i,
  input  logic [ROWS-1:0]   wl_i,
  output logic              core_busy_o,
  // error injection into the core model
  input  logic              inj_en_i,
  input  logic [CAW-1:0]    inj_col_i,
  input  logic signed [3:0] inj_delta_i,
  // debug codeword input
  input  logic              dbg_en_i,
  input  logic              dbg_valid_i,
  output logic              dbg_ready_o,
  input  logic [ADC_W-1:0]  dbg_code_i [C_P],
  // corrected output
  output logic              out_valid_o,
  output logic              out_ok_o,
  output logic [IW-1:0]     out_iter_o,
  output yval_t             out_val_o [N_DATA],
  output logic              dec_busy_o
);

  // ---------------- encoder and array write ----------------
  sym_t            enc_data  [N_DATA];
  sym_t            enc_check [N_CA];
  logic [COLS-1:0] row_bits;

  always_comb
    for (int i = 0; i < N_DATA; i++) enc_data[i] = sym_t'(wr_data_i[i]);

  always_comb begin
    for (int i = 0; i < N_DATA; i++) row_bits[i] = wr_data_i[i];
    for (int t = 0; t < N_CA; t++)
      for (int b = 0; b < SYM_W; b++)
        row_bits[N_DATA + t*SYM_W + b] = enc_check[t][b];
  end

  nbldpc_encoder #(.N_VA(N_VA), .N_CA(N_CA)) u_enc (
    .data_i (enc_data),
    .check_o(enc_check)
  );

  // ---------------- PIM core ----------------
  logic             core_valid, core_ready;
  logic [ADC_W-1:0] core_code [C_P];

  pim_core #(.ROWS(ROWS), .COLS(COLS), .C_P(C_P), .ADC_MAX(ADC_MAX)) u_core (
    .clk, .rst_n,
    .wr_en_i    (wr_en_i),
    .wr_row_i   (wr_row_i),
    .wr_bits_i  (row_bits),
    .start_i    (start_i),
    .wl_i       (wl_i),
    .inj_en_i   (inj_en_i),
    .inj_col_i  (inj_col_i),
    .inj_delta_i(inj_delta_i),
    .busy_o     (core_busy_o),
    .col_valid_o(core_valid),
    .col_ready_i(core_ready),
    .col_code_o (core_code)
  );

  // ---------------- debug / core source select ----------------
  logic             sch_valid, sch_ready;
  logic [ADC_W-1:0] sch_code [C_P];

  always_comb begin
    sch_valid = dbg_en_i ? dbg_valid_i : core_valid;
    for (int a = 0; a < C_P; a++) sch_code[a] = dbg_en_i ? dbg_code_i[a] : core_code[a];
  end
  assign core_ready  = !dbg_en_i && sch_ready;
  assign dbg_ready_o = dbg_en_i && sch_ready;

  // ---------------- input scheduler and decoder ----------------
  logic  cw_valid, cw_ready;
  yval_t cw_y    [N_VA];
  yval_t cw_ymax [N_VA];
  yval_t dec_val [N_VA];
  sym_t  dec_sym [N_VA];

  input_scheduler #(.N_P(1), .C_P(C_P), .N_VA(N_VA), .N_CA(N_CA), .ADC_MAX(ADC_MAX)) u_sched (
    .clk, .rst_n,
    .mode_i     (mode_i),
    .col_valid_i(sch_valid),
    .col_ready_o(sch_ready),
    .col_code_i (sch_code),
    .cw_valid_o (cw_valid),
    .cw_ready_i (cw_ready),
    .cw_y_o     (cw_y),
    .cw_ymax_o  (cw_ymax)
  );

  nbldpc_decoder #(.N_VA(N_VA), .N_VI(N_VI), .N_CA(N_CA), .N_CI(N_CI), .D_V(D_V),
                   .MAX_ITER(MAX_ITER)) u_dec (
    .clk, .rst_n,
    .cw_valid_i (cw_valid),
    .cw_ready_o (cw_ready),
    .cw_y_i     (cw_y),
    .cw_ymax_i  (cw_ymax),
    .out_valid_o(out_valid_o),
    .out_ok_o   (out_ok_o),
    .out_iter_o (out_iter_o),
    .out_val_o  (dec_val),
    .out_sym_o  (dec_sym),
    .busy_o     (dec_busy_o)
  );

  always_comb
    for (int i = 0; i < N_DATA; i++) out_val_o[i] = dec_val[i];

endmodule
