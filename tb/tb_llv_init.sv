// tb_llv_init -- exhaustive check of the LLV initializer: for every received value y
// and range ymax, each element's LLV must be minus the distance from y to the nearest
// value of that residue (searched by brute force over 0..15, preferring values inside
// 0..ymax).
module tb_llv_init;
  import nbldpc_pkg::*;
  yval_t y, ymax;
  llv_vec_t llv;
  int checks = 0, failures = 0;

  llv_init dut (.y_i(y), .ymax_i(ymax), .llv_o(llv));

  initial begin
    int best_in, best_out, d, exp_llv;
    for (int m = 1; m <= 12; m++)
      for (int yy = 0; yy <= m; yy++) begin
        y = yval_t'(yy); ymax = yval_t'(m);
        #1;
        for (int k = 0; k < int'(P); k++) begin
          best_in = 1000; best_out = 1000;
          for (int v = 0; v < 16; v++)
            if (v % int'(P) == k) begin
              d = (v > yy) ? v - yy : yy - v;
              if (v <= m) begin if (d < best_in) best_in = d; end
              else if (d < best_out) best_out = d;
            end
          // below zero counts as outside too
          if (best_in == 1000) begin
            d = ((yy % int'(P)) - k + int'(P)) % int'(P);
            if (d < best_out) best_out = d;
          end
          exp_llv = (best_in < 1000) ? -best_in : -best_out;
          checks++;
          if (int'(llv[k]) != exp_llv) begin
            failures++;
            $display("FAIL y=%0d ymax=%0d k=%0d llv=%0d exp=%0d", yy, m, k, llv[k], exp_llv);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
