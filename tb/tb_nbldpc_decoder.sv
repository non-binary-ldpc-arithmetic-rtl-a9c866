// tb_nbldpc_decoder -- self-checking testbench of the NB-LDPC decoder at the
// prototype size (288 VNs, 32 CNs of degree 18, one CN unit, GF(3)).
//
// Codewords are built as the PIM core would produce them: R random binary data rows
// (R = 1 in memory mode, 1..4 in PIM mode) are encoded by nbldpc_encoder, and the
// codeword symbol values are the column sums. The testbench checks independently,
// from the VN-side description of H_C, that every such word has a zero syndrome.
// It then adds +-1 errors to random symbols (staying inside each symbol's range)
// and checks that the decoder returns the error-free values:
//   0 errors : returned unchanged, all checks pass, no VN update, exact latency;
//   1 error  : corrected exactly, all checks pass;
//   2-5 errors: the share corrected is reported (max-sum decoding of this weight-2
//               code does not guarantee it), as are words that pass the check-node
//               test without being a codeword (possible on LLV ties).
// Every word also checks the cycle count: 2 + 32*28 cycles for the first pass and
// 1 + 32*28 for every further iteration.
module tb_nbldpc_decoder;
  import nbldpc_pkg::*;

  localparam int unsigned N_VA   = 288;
  localparam int unsigned N_CA   = 32;
  localparam int unsigned N_DATA = N_VA - N_CA;
  localparam int unsigned D_C    = 2 * (N_DATA / N_CA) + 2;
  localparam int unsigned ADC_MAX = 4;
  localparam int unsigned ROUND_CYC = D_C + (D_C - 1) / 2 + 2;

  logic  clk = 0, rst_n = 0;
  logic  cw_valid, cw_ready, out_valid, out_ok, busy;
  logic [3:0] out_iter;
  yval_t cw_y [N_VA], cw_ymax [N_VA], out_val [N_VA];
  sym_t  out_sym [N_VA];

  sym_t  enc_d [N_DATA];
  sym_t  enc_c [N_CA];

  nbldpc_decoder dut (
    .clk, .rst_n,
    .cw_valid_i(cw_valid), .cw_ready_o(cw_ready),
    .cw_y_i(cw_y), .cw_ymax_i(cw_ymax),
    .out_valid_o(out_valid), .out_ok_o(out_ok), .out_iter_o(out_iter),
    .out_val_o(out_val), .out_sym_o(out_sym), .busy_o(busy)
  );

  nbldpc_encoder u_enc (.data_i(enc_d), .check_o(enc_c));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_corr [6];
  int n_tried [6];
  int n_iter_max = 0;
  int n_false_pass = 0, n_flagged = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // independent syndrome from the VN side of H_C
  function automatic bit syndrome_zero(input int unsigned v [N_VA]);
    int unsigned s [N_CA];
    int unsigned g, r, c0, c1;
    for (int j = 0; j < N_CA; j++) s[j] = 0;
    for (int unsigned i = 0; i < N_VA; i++) begin
      if (i < N_DATA) begin
        g = i / N_CA; r = i % N_CA;
        c0 = r; c1 = (r + 2 + g) % N_CA;
      end else begin
        c0 = i - N_DATA; c1 = (i - N_DATA + 1) % N_CA;
      end
      s[c0] = (s[c0] + hc_coef(i, 0, N_CA, N_DATA) * (v[i] % P)) % P;
      s[c1] = (s[c1] + hc_coef(i, 1, N_CA, N_DATA) * (v[i] % P)) % P;
    end
    for (int j = 0; j < N_CA; j++) if (s[j] != 0) return 0;
    return 1;
  endfunction

  int unsigned clean [N_VA];
  int unsigned ymax  [N_VA];

  // build a clean codeword from nrows random encoded rows
  task automatic make_word(input int nrows, input bit pim);
    for (int i = 0; i < N_VA; i++) clean[i] = 0;
    for (int r = 0; r < nrows; r++) begin
      for (int i = 0; i < N_DATA; i++) enc_d[i] = sym_t'($urandom_range(0, 1));
      #1;
      for (int i = 0; i < N_DATA; i++) clean[i] += int'(enc_d[i]);
      for (int t = 0; t < N_CA; t++)   clean[N_DATA+t] += int'(enc_c[t]);
    end
    for (int i = 0; i < N_VA; i++)
      ymax[i] = (i < N_DATA) ? (pim ? ADC_MAX : 1) : (pim ? (P-1)*ADC_MAX : P-1);
  endtask

  task automatic run_word(input int nerr, input bit pim, input int nrows);
    int unsigned rx [N_VA];
    int unsigned pos [$];
    int p, cyc, expect_cyc;
    bit exact, synd;
    int unsigned got [N_VA];
    make_word(nrows, pim);
    check(syndrome_zero(clean), "encoded word has zero syndrome");
    rx = clean;
    pos = {};
    while (pos.size() < nerr) begin
      p = $urandom_range(0, N_VA-1);
      if (!(p inside {pos})) pos.push_back(p);
    end
    foreach (pos[e]) begin
      if (rx[pos[e]] == 0) rx[pos[e]] = 1;
      else if (rx[pos[e]] == ymax[pos[e]]) rx[pos[e]] = rx[pos[e]] - 1;
      else rx[pos[e]] = ($urandom_range(0,1) != 0) ? rx[pos[e]] + 1 : rx[pos[e]] - 1;
    end
    for (int i = 0; i < N_VA; i++) begin
      cw_y[i]    = yval_t'(rx[i]);
      cw_ymax[i] = yval_t'(ymax[i]);
    end
    @(negedge clk);
    cw_valid = 1;
    cyc = 0;
    // drive and sample at the falling edge, where all registers are stable
    do begin
      @(negedge clk);
      cyc++;
      if (cw_ready) cw_valid = 0;
    end while (!out_valid);
    exact = 1;
    for (int i = 0; i < N_VA; i++) begin
      got[i] = int'(out_val[i]);
      if (got[i] != clean[i]) exact = 0;
    end
    synd = syndrome_zero(got);
    if (int'(out_iter) > n_iter_max) n_iter_max = int'(out_iter);
    n_tried[nerr]++;
    if (exact && out_ok) n_corr[nerr]++;
    expect_cyc = 2 + N_CA * ROUND_CYC + int'(out_iter) * (1 + N_CA * ROUND_CYC);
    check(cyc == expect_cyc, $sformatf("latency %0d cycles, expected %0d (iter %0d)",
                                       cyc, expect_cyc, out_iter));
    if (nerr == 0) begin
      check(exact && out_ok && out_iter == 0, "error-free word passes unchanged");
    end else if (nerr == 1) begin
      check(exact && out_ok, $sformatf("single-error word corrected (pim=%0d)", pim));
    end
    if (out_ok && !synd) n_false_pass++;
    if (!out_ok) n_flagged++;
    repeat (2) @(posedge clk);
  endtask

  initial begin
    cw_valid = 0;
    foreach (cw_y[i]) begin cw_y[i] = '0; cw_ymax[i] = '0; end
    foreach (n_corr[i]) begin n_corr[i] = 0; n_tried[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int e = 0; e <= 5; e++) begin
      for (int n = 0; n < 6; n++) run_word(e, 0, 1);                       // memory mode
      for (int n = 0; n < 6; n++) run_word(e, 1, $urandom_range(1, 4));    // PIM mode
    end
    for (int e = 0; e <= 5; e++)
      $display("errors=%0d corrected %0d/%0d", e, n_corr[e], n_tried[e]);
    $display("largest iteration count %0d, words flagged uncorrectable %0d, passing non-codewords %0d",
             n_iter_max, n_flagged, n_false_pass);
    check(n_iter_max > 0, "iterative correction was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
