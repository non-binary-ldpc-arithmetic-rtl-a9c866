// tb_nbldpc_pkg -- checks the shared package: GF(3) addition, subtraction,
// multiplication and inverses against integer arithmetic, LLV saturation and
// arg-max, and the H_C structure at the prototype size (every VN on exactly two
// checks with non-zero coefficients, 18 edges per check, no two VNs sharing the same
// pair of checks, i.e. no 4-cycles).
module tb_nbldpc_pkg;
  import nbldpc_pkg::*;
  localparam int N_CA = 32, N_DATA = 256, N_VA = 288, D_C = 18;
  int checks = 0, failures = 0;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int deg [N_VA];
    int cn_of [N_VA][2];
    llv_vec_t v;
    for (int a = 0; a < 3; a++)
      for (int b = 0; b < 3; b++) begin
        chk(gf_add(a, b) == (a + b) % 3, "gf_add");
        chk(gf_sub(a, b) == (a - b + 3) % 3, "gf_sub");
        chk(gf_mul(a, b) == (a * b) % 3, "gf_mul");
      end
    chk(gf_inv(1) == 1 && gf_inv(2) == 2, "gf_inv");
    chk(llv_sat(300) == 127 && llv_sat(-300) == -128 && llv_sat(-5) == -5, "llv_sat");
    v = {llv_t'(3), llv_t'(7), llv_t'(7)};
    chk(llv_argmax(v) == 0, "argmax tie takes the lowest element");
    v = {llv_t'(9), llv_t'(-1), llv_t'(7)};
    chk(llv_argmax(v) == 2, "argmax");
    foreach (deg[i]) deg[i] = 0;
    for (int j = 0; j < N_CA; j++)
      for (int k = 0; k < D_C; k++) begin
        int i, s;
        i = hc_edge_vn(j, k, N_CA, N_DATA);
        s = hc_edge_slot(k, N_CA, N_DATA);
        chk(i < N_VA, "edge VN index in range");
        chk(hc_edge_coef(j, k, N_CA, N_DATA) inside {1, 2}, "edge coefficient non-zero");
        cn_of[i][s] = j;
        deg[i]++;
      end
    foreach (deg[i]) chk(deg[i] == 2, $sformatf("VN %0d has degree 2", i));
    for (int a = 0; a < N_VA; a++) begin
      chk(cn_of[a][0] != cn_of[a][1], "two distinct checks per VN");
      for (int b = a + 1; b < N_VA; b++)
        if ((cn_of[a][0] == cn_of[b][0] && cn_of[a][1] == cn_of[b][1]) ||
            (cn_of[a][0] == cn_of[b][1] && cn_of[a][1] == cn_of[b][0])) begin
          failures++; checks++;
          $display("FAIL 4-cycle VN %0d and %0d", a, b);
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
