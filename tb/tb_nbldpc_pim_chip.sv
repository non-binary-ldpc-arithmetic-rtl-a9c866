// tb_nbldpc_pim_chip -- end-to-end test of the PIM chip with NB-LDPC correction at its
// default (prototype) size: 256x320 array, ten ADCs, 288-VN / 32-CN decoder.
//
// All 256 rows are programmed through the encoder write path with random data. Then:
//   memory mode   : single-row reads must return the stored data bits;
//   PIM mode      : 2-4 active rows must return the data column sums;
//   injected error: a +-1 error on one column (data or check cell) must be corrected
//                   after at least one decoding iteration;
//   stall         : computations started while the decoder is busy fill the scheduler;
//                   the next one must be held back in the core (back-pressure) and
//                   all must still be decoded correctly;
//   debug input   : codewords fed through the debug port (the all-zero codeword with
//                   one error, and heavily corrupted words that must end at the
//                   iteration limit flagged as not corrected).
// Expected results come from the testbench's own copy of the stored bits. Each
// mechanism is counted and one that never happens counts as a failure.
module tb_nbldpc_pim_chip;
  import nbldpc_pkg::*;
  localparam int ROWS = 256, N_DATA = 256, COLS = 320, C_P = 10;

  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_MEM;
  logic wr_en = 0, start = 0, inj_en = 0, dbg_en = 0, dbg_valid = 0;
  logic [7:0] wr_row = 0;
  logic [N_DATA-1:0] wr_data = '0;
  logic [ROWS-1:0] wl = '0;
  logic [8:0] inj_col = 0;
  logic signed [3:0] inj_delta = 0;
  logic [2:0] dbg_code [C_P];
  logic core_busy, dbg_ready, out_valid, out_ok, dec_busy;
  logic [3:0] out_iter;
  yval_t out_val [N_DATA];

  nbldpc_pim_chip dut (
    .clk, .rst_n, .mode_i(mode), .wr_en_i(wr_en), .wr_row_i(wr_row), .wr_data_i(wr_data),
    .start_i(start), .wl_i(wl), .core_busy_o(core_busy), .inj_en_i(inj_en),
    .inj_col_i(inj_col), .inj_delta_i(inj_delta), .dbg_en_i(dbg_en),
    .dbg_valid_i(dbg_valid), .dbg_ready_o(dbg_ready), .dbg_code_i(dbg_code),
    .out_valid_o(out_valid), .out_ok_o(out_ok), .out_iter_o(out_iter),
    .out_val_o(out_val), .dec_busy_o(dec_busy));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_mem = 0, n_pim = 0, n_corrected = 0, n_stall = 0, n_debug = 0, n_limit = 0,
      n_clean_pass = 0;
  logic [N_DATA-1:0] mem [ROWS];

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // count cycles where the core has a beat but the scheduler refuses it
  always @(posedge clk) if (dut.core_valid && !dut.core_ready && !dbg_en) n_stall++;

  function automatic int col_sum(logic [ROWS-1:0] w, int c);
    int s = 0;
    for (int r = 0; r < ROWS; r++) if (w[r] && mem[r][c]) s++;
    return s;
  endfunction

  task automatic wait_out;
    int guard = 0;
    while (!out_valid && guard < 20000) begin @(negedge clk); guard++; end
    chk(out_valid, "decoder produced a result");
  endtask

  task automatic check_result(logic [ROWS-1:0] w, string tag);
    int bad = 0;
    for (int c = 0; c < N_DATA; c++) if (int'(out_val[c]) != col_sum(w, c)) bad++;
    chk(bad == 0 && out_ok, $sformatf("%s: %0d wrong columns, ok=%0d", tag, bad, out_ok));
  endtask

  task automatic compute(logic [ROWS-1:0] w, mode_e m, bit inject, int col, int delta);
    mode = m; wl = w;
    if (inject) begin
      inj_en = 1; inj_col = 9'(col); inj_delta = 4'(delta);
      @(negedge clk);
      inj_en = 0;
    end
    start = 1;
    @(negedge clk);
    start = 0;
  endtask

  function automatic logic [ROWS-1:0] pick_rows(int n);
    logic [ROWS-1:0] w = '0;
    while ($countones(w) < n) w[$urandom_range(0, ROWS-1)] = 1;
    return w;
  endfunction

  task automatic send_debug(int cols [COLS]);
    int beat = 0;
    dbg_en = 1; mode = MODE_PIM;
    while (beat < COLS / C_P) begin
      dbg_valid = 1;
      for (int a = 0; a < C_P; a++) dbg_code[a] = 3'(cols[beat*C_P + a]);
      @(negedge clk);
      if (dbg_ready) beat++;
    end
    dbg_valid = 0;
  endtask

  initial begin
    logic [ROWS-1:0] w, w2, w3;
    int cols [COLS];
    int col, delta;
    foreach (dbg_code[a]) dbg_code[a] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // program the array through the encoder
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < N_DATA; c++) mem[r][c] = $urandom_range(0, 1);
      wr_en = 1; wr_row = 8'(r); wr_data = mem[r];
      @(negedge clk);
    end
    wr_en = 0;
    // memory-mode reads
    for (int n = 0; n < 4; n++) begin
      w = '0; w[$urandom_range(0, ROWS-1)] = 1;
      compute(w, MODE_MEM, 0, 0, 0);
      wait_out();
      check_result(w, "memory read");
      chk(out_iter == 0, "clean read needs no iteration");
      n_mem++; n_clean_pass++;
      @(negedge clk);
    end
    // PIM MACs, clean and with one injected error
    for (int n = 0; n < 8; n++) begin
      w = pick_rows($urandom_range(2, 4));
      col = $urandom_range(0, COLS-1);
      delta = (col_sum(w, col < N_DATA ? col : 0) == 0 || n % 2 == 0) ? 1 : -1;
      if (col >= N_DATA) delta = 1;
      compute(w, MODE_PIM, n >= 2, col, delta);
      wait_out();
      check_result(w, n >= 2 ? "PIM with injected error" : "PIM clean");
      if (n >= 2 && out_iter > 0 && out_ok) n_corrected++;
      if (n < 2) n_clean_pass++;
      n_pim++;
      @(negedge clk);
    end
    // back-to-back computations: the second one waits in the scheduler and the core
    w = pick_rows(3); w2 = pick_rows(4); w3 = pick_rows(2);
    compute(w, MODE_PIM, 1, 17, 1);
    while (!dec_busy) @(negedge clk);
    compute(w2, MODE_PIM, 0, 0, 0);
    while (!dut.cw_valid) @(negedge clk);
    compute(w3, MODE_PIM, 0, 0, 0);       // scheduler full: the core must wait
    wait_out();
    check_result(w, "first of back-to-back");
    @(negedge clk);
    wait_out();
    check_result(w2, "second of back-to-back");
    @(negedge clk);
    wait_out();
    check_result(w3, "third of back-to-back");
    @(negedge clk);
    // debug port: all-zero codeword with one error
    for (int n = 0; n < 3; n++) begin
      foreach (cols[c]) cols[c] = 0;
      cols[$urandom_range(0, COLS-1)] = 1;
      send_debug(cols);
      dbg_en = 0;
      wait_out();
      begin
        int bad = 0;
        for (int c = 0; c < N_DATA; c++) if (out_val[c] != 0) bad++;
        chk(bad == 0 && out_ok, "debug codeword corrected");
      end
      n_debug++;
      @(negedge clk);
    end
    // debug port: heavily corrupted words end at the iteration limit
    for (int n = 0; n < 3; n++) begin
      foreach (cols[c]) cols[c] = $urandom_range(0, 4);
      send_debug(cols);
      dbg_en = 0;
      wait_out();
      if (!out_ok && out_iter == 10) n_limit++;
      @(negedge clk);
    end
    $display("memory reads %0d, PIM MACs %0d, clean passes %0d, corrected %0d, stall cycles %0d, debug words %0d, iteration-limit stops %0d",
             n_mem, n_pim, n_clean_pass, n_corrected, n_stall, n_debug, n_limit);
    chk(n_mem > 0, "memory mode exercised");
    chk(n_pim > 0, "PIM mode exercised");
    chk(n_clean_pass > 0, "error-free detection exercised");
    chk(n_corrected > 0, "iterative correction exercised");
    chk(n_stall > 0, "scheduler back-pressure exercised");
    chk(n_debug > 0, "debug input exercised");
    chk(n_limit > 0, "iteration limit exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
