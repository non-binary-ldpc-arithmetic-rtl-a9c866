// tb_vn_group -- checks the variable-node group with 12 VNs served by 4 lanes:
// chunked initialisation (prior = temporal = -distance LLVs), LLV' slot writes,
// chunked updates (temporal = prior + slots, normalised to element 0) and the
// per-VN decisions, against a reference model kept in the testbench.
module tb_vn_group;
  import nbldpc_pkg::*;
  localparam int N_VA = 12, N_VI = 4, D_V = 2, NW = 3;
  logic clk = 0, rst_n = 0, init = 0, upd = 0;
  logic [1:0] init_chunk = 0, upd_chunk = 0;
  yval_t iy [N_VI], iymax [N_VI];
  logic wr_en [NW];
  logic [3:0] wr_vn [NW];
  logic wr_slot [NW];
  llv_vec_t wr_llv [NW];
  llv_vec_t temp [N_VA];
  sym_t sym [N_VA];
  yval_t val [N_VA];
  int checks = 0, failures = 0;

  vn_group #(.N_VA(N_VA), .N_VI(N_VI), .D_V(D_V), .NW(NW)) dut (
    .clk, .rst_n, .init_i(init), .init_chunk_i(init_chunk), .init_y_i(iy),
    .init_ymax_i(iymax), .upd_i(upd), .upd_chunk_i(upd_chunk), .wr_en_i(wr_en),
    .wr_vn_i(wr_vn), .wr_slot_i(wr_slot), .wr_llv_i(wr_llv), .temp_o(temp),
    .sym_o(sym), .val_o(val));

  always #5 clk = ~clk;

  int ry [N_VA], rm [N_VA];
  int prior [N_VA][3], slot [N_VA][2][3], rtemp [N_VA][3];

  function automatic int mdist(int y, int m, int k);
    int b = 1000;
    for (int v = 0; v <= m; v++) if (v % 3 == k) b = ((v > y ? v - y : y - v) < b) ? (v > y ? v - y : y - v) : b;
    return b;
  endfunction

  task automatic cmp_temp(string tag);
    int es;
    for (int v = 0; v < N_VA; v++) begin
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (int'(temp[v][k]) != rtemp[v][k]) begin
          failures++; $display("FAIL %s temp[%0d][%0d]=%0d exp %0d", tag, v, k, temp[v][k], rtemp[v][k]);
        end
      end
      es = 0;
      for (int k = 1; k < 3; k++) if (rtemp[v][k] > rtemp[v][es]) es = k;
      checks++;
      if (int'(sym[v]) != es) begin failures++; $display("FAIL %s sym[%0d]", tag, v); end
    end
  endtask

  initial begin
    foreach (wr_en[w]) begin wr_en[w] = 0; wr_vn[w] = 0; wr_slot[w] = 0; wr_llv[w] = '0; end
    foreach (iy[l]) begin iy[l] = 0; iymax[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      // initialise in 3 chunks
      for (int c = 0; c < 3; c++) begin
        for (int l = 0; l < N_VI; l++) begin
          rm[c*N_VI+l] = $urandom_range(2, 8);
          ry[c*N_VI+l] = $urandom_range(0, rm[c*N_VI+l]);
          iy[l] = yval_t'(ry[c*N_VI+l]); iymax[l] = yval_t'(rm[c*N_VI+l]);
        end
        init = 1; init_chunk = 2'(c);
        @(negedge clk);
      end
      init = 0;
      for (int v = 0; v < N_VA; v++)
        for (int k = 0; k < 3; k++) begin
          prior[v][k] = -mdist(ry[v], rm[v], k);
          rtemp[v][k] = prior[v][k];
          slot[v][0][k] = 0; slot[v][1][k] = 0;
        end
      cmp_temp("init");
      // every slot written once, NW per cycle
      for (int v = 0; v < N_VA; v += 3) for (int s = 0; s < 2; s++) begin
        for (int w = 0; w < NW; w++) begin
          wr_en[w] = 1; wr_vn[w] = 4'(v + w); wr_slot[w] = s[0];
          for (int k = 0; k < 3; k++) begin
            slot[v+w][s][k] = $urandom_range(0, 20) - 10;
            wr_llv[w][k] = llv_t'(slot[v+w][s][k]);
          end
        end
        @(negedge clk);
      end
      foreach (wr_en[w]) wr_en[w] = 0;
      for (int c = 0; c < 3; c++) begin
        upd = 1; upd_chunk = 2'(c);
        @(negedge clk);
      end
      upd = 0;
      for (int v = 0; v < N_VA; v++) begin
        int t [3];
        for (int k = 0; k < 3; k++) t[k] = prior[v][k] + slot[v][0][k] + slot[v][1][k];
        for (int k = 0; k < 3; k++) rtemp[v][k] = t[k] - t[0];
      end
      cmp_temp("update");
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
