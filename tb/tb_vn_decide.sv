// tb_vn_decide -- checks the decision (largest LLV, lowest element on a tie) and the
// interpretation (closest value of the decided residue inside 0..ymax, smaller value
// on equal distance) against a brute-force search, for random LLV groups.
module tb_vn_decide;
  import nbldpc_pkg::*;
  llv_vec_t llv;
  yval_t y, ymax, val;
  sym_t sym;
  int checks = 0, failures = 0;

  vn_decide dut (.llv_i(llv), .y_i(y), .ymax_i(ymax), .sym_o(sym), .val_o(val));

  initial begin
    int es, ev, bd, d, m, yy;
    for (int n = 0; n < 3000; n++) begin
      for (int k = 0; k < int'(P); k++) llv[k] = llv_t'($urandom_range(0, 8) - 4);
      m  = $urandom_range(2, 12);
      yy = $urandom_range(0, m);
      y = yval_t'(yy); ymax = yval_t'(m);
      #1;
      es = 0;
      for (int k = 1; k < int'(P); k++) if (llv[k] > llv[es]) es = k;
      ev = yy; bd = 1000;
      for (int v = 0; v <= m; v++)
        if (v % int'(P) == es) begin
          d = (v > yy) ? v - yy : yy - v;
          if (d < bd) begin bd = d; ev = v; end
        end
      checks += 2;
      if (int'(sym) != es) begin failures++; $display("FAIL sym %0d exp %0d", sym, es); end
      if (int'(val) != ev) begin failures++; $display("FAIL val %0d exp %0d (y=%0d ymax=%0d s=%0d)", val, ev, yy, m, es); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
