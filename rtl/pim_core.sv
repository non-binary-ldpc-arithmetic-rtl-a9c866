// pim_core -- BEHAVIOURAL MODEL of the analog PIM core: a ROWS x COLS binary 1T1R
// RRAM crossbar with its address decoder and C_P flash ADCs. The real macro is an
// analog, process-specific circuit; this model only reproduces its digital behaviour
// at the ports and is not meant for synthesis as a circuit.
//
// Programming: wr_en_i writes the COLS cell states of row wr_row_i.
// Computing: start_i samples the word-line vector wl_i (one input bit per row, the
// bit-serial input of one cycle; a single active row is a memory-mode read). The
// core then streams COLS/C_P beats of C_P ADC codes, beat b carrying columns
// b*C_P .. b*C_P+C_P-1. The code of a column is the number of active rows whose cell
// is set (the bit-line current), clipped to ADC_MAX by the flash ADC.
// Noise: inj_en_i adds the signed offset inj_delta_i to column inj_col_i of the next
// computation (clipped to the code range), modelling an analog error.
// Handshake: col_valid_o/col_ready_i per beat; busy_o while streaming.
//
// Follows the paper: array size, binary cells, ten flash ADCs, column accumulation
// along bit-lines. Own choices: the streaming order, the handshake, the noise port.
module pim_core
  import nbldpc_pkg::*;
#(
  parameter int unsigned ROWS    = 256,
  parameter int unsigned COLS    = 320,
  parameter int unsigned C_P     = 10,
  parameter int unsigned ADC_MAX = 4,
  localparam int unsigned N_BEAT = COLS / C_P,
  localparam int unsigned BW     = $clog2(N_BEAT + 1),
  localparam int unsigned RAW    = $clog2(ROWS),
  localparam int unsigned CAW    = $clog2(COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en_i,
  input  logic [RAW-1:0]    wr_row_i,
  input  logic [COLS-1:0]   wr_bits_i,
  input  logic              start_i,
  input  logic [ROWS-1:0]   wl_i,
  input  logic              inj_en_i,
  input  logic [CAW-1:0]    inj_col_i,
  input  logic signed [3:0] inj_delta_i,
  output logic              busy_o,
  output logic              col_valid_o,
  input  logic              col_ready_i,
  output logic [ADC_W-1:0]  col_code_o [C_P]
);

  logic [COLS-1:0]   cell_q [ROWS];
  logic [ROWS-1:0]   wl_q;
  logic [BW-1:0]     beat_q;
  logic              run_q;
  logic              inj_q;
  logic [CAW-1:0]    inj_col_q;
  logic signed [3:0] inj_delta_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) cell_q[r] <= '0;
      wl_q        <= '0;
      beat_q      <= '0;
      run_q       <= 1'b0;
      inj_q       <= 1'b0;
      inj_col_q   <= '0;
      inj_delta_q <= '0;
    end else begin
      if (wr_en_i) cell_q[wr_row_i] <= wr_bits_i;
      if (inj_en_i) begin
        inj_q       <= 1'b1;
        inj_col_q   <= inj_col_i;
        inj_delta_q <= inj_delta_i;
      end
      if (start_i && !run_q) begin
        wl_q   <= wl_i;
        beat_q <= '0;
        run_q  <= 1'b1;
      end else if (run_q && col_ready_i) begin
        if (int'(beat_q) == N_BEAT - 1) begin
          run_q <= 1'b0;
          inj_q <= 1'b0;
        end
        beat_q <= beat_q + BW'(1);
      end
    end
  end

  // bit-line accumulation and flash ADC of the current beat
  always_comb begin
    int unsigned col;
    int          sum;
    for (int unsigned a = 0; a < C_P; a++) begin
      col = int'(beat_q) * C_P + a;
      sum = 0;
      for (int unsigned r = 0; r < ROWS; r++)
        if (wl_q[r] && cell_q[r][col]) sum = sum + 1;
      if (sum > int'(ADC_MAX)) sum = ADC_MAX;
      if (inj_q && int'(inj_col_q) == int'(col)) sum = sum + int'(inj_delta_q);
      if (sum < 0) sum = 0;
      if (sum > (1 << ADC_W) - 1) sum = (1 << ADC_W) - 1;
      col_code_o[a] = ADC_W'(sum);
    end
  end

  assign col_valid_o = run_q;
  assign busy_o      = run_q;

endmodule
