// tb_fbp_prop -- checks the FBP propagation module against a direct evaluation of
// the max-plus convolution, element-0 normalisation and reverse reflection, for random
// LLV groups, both neutral-input cases and the worked example of the paper's figure
// (inputs 0 1 2 and 0 1 -1: sums 4 2 3, normalised 0 -2 -1, reflected 0 -1 -2).
module tb_fbp_prop;
  import nbldpc_pkg::*;
  llv_vec_t a, b, o;
  logic a_id, b_id, refl;
  int checks = 0, failures = 0;

  fbp_prop dut (.a_i(a), .a_ident_i(a_id), .b_i(b), .b_ident_i(b_id), .reflect_i(refl), .o_o(o));

  function automatic int sat(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  task automatic expect_out;
    int s [3], nrm [3], e;
    for (int k = 0; k < 3; k++) begin
      if (a_id) s[k] = int'(b[k]);
      else if (b_id) s[k] = int'(a[k]);
      else begin
        s[k] = -100000;
        for (int j = 0; j < 3; j++)
          if (sat(int'(a[(k - j + 3) % 3]) + int'(b[j])) > s[k])
            s[k] = sat(int'(a[(k - j + 3) % 3]) + int'(b[j]));
      end
    end
    for (int k = 0; k < 3; k++) nrm[k] = sat(s[k] - s[0]);
    for (int k = 0; k < 3; k++) begin
      e = refl ? nrm[(3 - k) % 3] : nrm[k];
      checks++;
      if (int'(o[k]) != e) begin
        failures++;
        $display("FAIL k=%0d got %0d exp %0d", k, o[k], e);
      end
    end
  endtask

  initial begin
    // paper example
    a = {llv_t'(2), llv_t'(1), llv_t'(0)};
    b = {llv_t'(-1), llv_t'(1), llv_t'(0)};
    a_id = 0; b_id = 0; refl = 1;
    #1;
    checks++;
    if (!(o[0] == 0 && o[1] == -1 && o[2] == -2)) begin
      failures++;
      $display("FAIL example: %0d %0d %0d", o[0], o[1], o[2]);
    end
    for (int n = 0; n < 4000; n++) begin
      for (int k = 0; k < 3; k++) begin
        a[k] = llv_t'($urandom_range(0, 255));
        b[k] = llv_t'((n % 2) ? $urandom_range(0, 255) : $urandom_range(0, 12) - 6);
      end
      a_id = ($urandom_range(0, 9) == 0);
      b_id = !a_id && ($urandom_range(0, 9) == 0);
      refl = $urandom_range(0, 1);
      #1;
      expect_out();
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
