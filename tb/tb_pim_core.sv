// tb_pim_core -- checks the behavioural PIM core: programmed rows, column sums of the
// active rows clipped to the ADC range, the beat order (ten columns per beat, 32
// beats), back-pressure, and the +-offset error injection on one column.
module tb_pim_core;
  import nbldpc_pkg::*;
  localparam int ROWS = 256, COLS = 320, C_P = 10;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, inj_en = 0, ready = 1;
  logic [7:0] wr_row = 0;
  logic [COLS-1:0] wr_bits = '0;
  logic [ROWS-1:0] wl = '0;
  logic [8:0] inj_col = 0;
  logic signed [3:0] inj_delta = 0;
  logic busy, valid;
  logic [2:0] code [C_P];
  int checks = 0, failures = 0;

  pim_core dut (.clk, .rst_n, .wr_en_i(wr_en), .wr_row_i(wr_row), .wr_bits_i(wr_bits),
                .start_i(start), .wl_i(wl), .inj_en_i(inj_en), .inj_col_i(inj_col),
                .inj_delta_i(inj_delta), .busy_o(busy), .col_valid_o(valid),
                .col_ready_i(ready), .col_code_o(code));

  always #5 clk = ~clk;

  logic [COLS-1:0] mem [ROWS];

  initial begin
    int exp_v, beat, sum, ic, idl;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) mem[r][c] = ($urandom_range(0, 2) == 0);
      wr_en = 1; wr_row = 8'(r); wr_bits = mem[r];
      @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 12; n++) begin
      wl = '0;
      for (int k = 0; k < ((n % 3 == 0) ? 1 : (n % 3 == 1) ? 4 : 9); k++) wl[$urandom_range(0, ROWS-1)] = 1;
      ic = $urandom_range(0, COLS-1);
      idl = (n % 2) ? 1 : -1;
      inj_en = (n >= 6); inj_col = 9'(ic); inj_delta = 4'(idl);
      @(negedge clk);
      inj_en = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      beat = 0;
      while (beat < COLS / C_P) begin
        ready = ($urandom_range(0, 3) != 0);
        checks++;
        if (!valid) begin failures++; $display("FAIL not valid in beat %0d", beat); end
        for (int a = 0; a < C_P; a++) begin
          sum = 0;
          for (int r = 0; r < ROWS; r++) if (wl[r] && mem[r][beat*C_P+a]) sum++;
          exp_v = (sum > 4) ? 4 : sum;
          if (n >= 6 && beat*C_P+a == ic) exp_v = exp_v + idl;
          if (exp_v < 0) exp_v = 0;
          checks++;
          if (int'(code[a]) != exp_v) begin
            failures++; $display("FAIL n=%0d col %0d code %0d exp %0d", n, beat*C_P+a, code[a], exp_v);
          end
        end
        @(negedge clk);
        if (ready) beat++;
      end
      ready = 1;
      checks++;
      if (valid || busy) begin failures++; $display("FAIL still streaming"); end
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
