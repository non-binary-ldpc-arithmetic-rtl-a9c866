// tb_input_scheduler -- checks the codeword buffer at the prototype size: 32 beats of
// ten ADC codes form 320 columns; data symbols are the columns themselves, check
// symbol t is column 256+2t plus twice column 257+2t; ranges follow the mode (PIM:
// 4 and 8, memory: 1 and 2). Beats offered while a codeword waits must be refused,
// and a taken codeword frees the buffer.
module tb_input_scheduler;
  import nbldpc_pkg::*;
  localparam int C_P = 10, N_VA = 288, N_DATA = 256, N_CA = 32, COLS = 320;
  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic col_valid = 0, col_ready, cw_valid, cw_ready = 0;
  logic [2:0] code [C_P];
  yval_t y [N_VA], ymax [N_VA];
  int checks = 0, failures = 0;

  input_scheduler dut (.clk, .rst_n, .mode_i(mode), .col_valid_i(col_valid),
                       .col_ready_o(col_ready), .col_code_i(code), .cw_valid_o(cw_valid),
                       .cw_ready_i(cw_ready), .cw_y_o(y), .cw_ymax_o(ymax));

  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int cols [COLS];
    int beats;
    foreach (code[a]) code[a] = 0;
    mode = MODE_PIM;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      mode = (n % 2) ? MODE_MEM : MODE_PIM;
      foreach (cols[c]) cols[c] = $urandom_range(0, 4);
      beats = 0;
      while (beats < 32) begin
        col_valid = ($urandom_range(0, 3) != 0);
        for (int a = 0; a < C_P; a++) code[a] = 3'(cols[beats*C_P + a]);
        @(negedge clk);
        if (col_valid) beats++;
        if (beats == 1) mode = (n % 2) ? MODE_PIM : MODE_MEM;  // later mode changes ignored
      end
      col_valid = 0;
      chk(cw_valid, "codeword complete after 32 beats");
      chk(!col_ready, "buffer full refuses beats");
      for (int i = 0; i < N_DATA; i++) begin
        chk(int'(y[i]) == cols[i], "data symbol");
        chk(int'(ymax[i]) == ((n % 2) ? 1 : 4), "data range");
      end
      for (int t = 0; t < N_CA; t++) begin
        chk(int'(y[N_DATA+t]) == cols[N_DATA+2*t] + 2*cols[N_DATA+2*t+1], "check symbol shift-and-add");
        chk(int'(ymax[N_DATA+t]) == ((n % 2) ? 2 : 8), "check range");
      end
      repeat (3) @(negedge clk);
      chk(cw_valid, "codeword held until taken");
      cw_ready = 1;
      @(negedge clk);
      cw_ready = 0;
      chk(!cw_valid && col_ready, "buffer freed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
