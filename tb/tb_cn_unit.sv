// tb_cn_unit -- checks the check-node unit at D_C = 18 against a direct reference:
// each LLV'[i] must equal the max-plus sum of all inputs except i, normalised to
// element 0 and reflected; pass must match the hard-decision parity when every input
// has a unique largest element. Small random LLVs keep the reference free of
// saturation. The latency from the start edge to done must be 27 cycles.
module tb_cn_unit;
  import nbldpc_pkg::*;
  localparam int D_C = 18;
  logic clk = 0, rst_n = 0, start = 0, busy, done, pass;
  llv_vec_t in_llv [D_C], out_llv [D_C];
  int checks = 0, failures = 0;

  cn_unit #(.D_C(D_C)) dut (.clk, .rst_n, .start_i(start), .in_llv_i(in_llv),
                            .busy_o(busy), .done_o(done), .pass_o(pass), .out_llv_o(out_llv));

  always #5 clk = ~clk;

  typedef int vec3_t [3];

  function automatic vec3_t conv(vec3_t a, vec3_t b);
    vec3_t r;
    for (int k = 0; k < 3; k++) begin
      r[k] = -100000;
      for (int j = 0; j < 3; j++)
        if (a[(k - j + 3) % 3] + b[j] > r[k]) r[k] = a[(k - j + 3) % 3] + b[j];
    end
    return r;
  endfunction

  initial begin
    vec3_t acc, l;
    int cyc, hsum, e, amax_l;
    bit uniq, exp_pass;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      uniq = 1; hsum = 0;
      for (int i = 0; i < D_C; i++) begin
        for (int k = 0; k < 3; k++) in_llv[i][k] = llv_t'($urandom_range(0, 6) - 3);
        if (n % 2 == 0) begin  // prior-like groups: one element 0, others negative
          e = $urandom_range(0, 2);
          for (int k = 0; k < 3; k++) in_llv[i][k] = (k == e) ? 0 : llv_t'(-1 - $urandom_range(0, 2));
        end
        amax_l = 0;
        for (int k = 1; k < 3; k++) if (in_llv[i][k] > in_llv[i][amax_l]) amax_l = k;
        for (int k = 0; k < 3; k++) if (k != amax_l && in_llv[i][k] == in_llv[i][amax_l]) uniq = 0;
        hsum += amax_l;
      end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 27) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int i = 0; i < D_C; i++) begin
        acc = '{0, -100000, -100000};
        for (int j = 0; j < D_C; j++) if (j != i) begin
          for (int k = 0; k < 3; k++) l[k] = int'(in_llv[j][k]);
          acc = conv(acc, l);
        end
        for (int k = 0; k < 3; k++) begin
          e = acc[(3 - k) % 3] - acc[0];
          checks++;
          if (int'(out_llv[i][k]) != e) begin
            failures++;
            $display("FAIL n=%0d out[%0d][%0d]=%0d exp %0d", n, i, k, out_llv[i][k], e);
          end
        end
      end
      if (uniq) begin
        exp_pass = (hsum % 3 == 0);
        checks++;
        if (pass != exp_pass) begin failures++; $display("FAIL pass=%0d exp %0d", pass, exp_pass); end
      end
      @(negedge clk);
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
