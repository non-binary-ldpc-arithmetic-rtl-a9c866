// tb_nbldpc_encoder -- checks the check-symbol generator at the prototype size:
// for random data words (binary and full GF(3)) the encoded word must satisfy every
// check of H_C, evaluated from the VN side of the code; data-only words of a single
// non-zero symbol are also checked to give the unique solution.
module tb_nbldpc_encoder;
  import nbldpc_pkg::*;
  localparam int N_VA = 288, N_CA = 32, N_DATA = 256;
  sym_t d [N_DATA], c [N_CA];
  int checks = 0, failures = 0;

  nbldpc_encoder dut (.data_i(d), .check_o(c));

  function automatic int vn_cn(int i, int s);
    if (i < N_DATA) return s == 0 ? i % N_CA : (i % N_CA + 2 + i / N_CA) % N_CA;
    return s == 0 ? i - N_DATA : (i - N_DATA + 1) % N_CA;
  endfunction

  initial begin
    int syn [N_CA];
    int x;
    for (int n = 0; n < 400; n++) begin
      for (int i = 0; i < N_DATA; i++)
        d[i] = (n < 40) ? sym_t'((i == n) ? 1 + n % 2 : 0)
                        : sym_t'((n % 2) ? $urandom_range(0, 1) : $urandom_range(0, 2));
      #1;
      foreach (syn[j]) syn[j] = 0;
      for (int i = 0; i < N_VA; i++) begin
        x = (i < N_DATA) ? int'(d[i]) : int'(c[i - N_DATA]);
        checks++;
        if (x > 2) begin failures++; $display("FAIL symbol out of field"); end
        for (int s = 0; s < 2; s++)
          syn[vn_cn(i, s)] = (syn[vn_cn(i, s)] + hc_coef(i, s, N_CA, N_DATA) * x) % 3;
      end
      foreach (syn[j]) begin
        checks++;
        if (syn[j] != 0) begin failures++; $display("FAIL word %0d check %0d = %0d", n, j, syn[j]); end
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
