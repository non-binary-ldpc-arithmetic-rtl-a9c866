// tb_hc_connect -- checks the H_C connection network at the prototype size (288 VNs,
// 32 CNs, one CN unit). For every round (check node j) the 18 edges must address
// exactly the VN slots that the VN-side description of the code attaches to check j
// (data VN g*32+r: checks r and r+2+g; check VN 256+t: checks t and t+1, all mod 32),
// the CN input must be the VN's temporal LLV group with element z taken from element
// z*h^-1, and the write-back must take element x from element x*h of the CN output.
module tb_hc_connect;
  import nbldpc_pkg::*;
  localparam int N_VA = 288, N_CA = 32, N_DATA = 256, D_C = 18;
  logic [4:0] round;
  llv_vec_t temp [N_VA], cn_in [D_C], cn_out [D_C], wr_llv [D_C];
  logic wr_valid;
  logic wr_en [D_C];
  logic [8:0] wr_vn [D_C];
  logic wr_slot [D_C];
  int checks = 0, failures = 0;

  hc_connect dut (.round_i(round), .temp_i(temp), .cn_in_o(cn_in), .cn_out_i(cn_out),
                  .wr_valid_i(wr_valid), .wr_en_o(wr_en), .wr_vn_o(wr_vn),
                  .wr_slot_o(wr_slot), .wr_llv_o(wr_llv));

  function automatic int vn_cn(int i, int s);
    if (i < N_DATA) return s == 0 ? i % N_CA : (i % N_CA + 2 + i / N_CA) % N_CA;
    return s == 0 ? i - N_DATA : (i - N_DATA + 1) % N_CA;
  endfunction

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int seen [N_VA][2];
    int h, hinv, v, s;
    foreach (temp[i]) for (int k = 0; k < 3; k++) temp[i][k] = llv_t'(($urandom_range(0, 255)));
    foreach (seen[i]) begin seen[i][0] = 0; seen[i][1] = 0; end
    for (int j = 0; j < N_CA; j++) begin
      round = 5'(j);
      wr_valid = j[0];
      foreach (cn_out[k]) for (int z = 0; z < 3; z++) cn_out[k][z] = llv_t'($urandom_range(0, 255));
      #1;
      for (int k = 0; k < D_C; k++) begin
        v = int'(wr_vn[k]); s = int'(wr_slot[k]);
        chk(vn_cn(v, s) == j, $sformatf("edge %0d of check %0d goes to VN %0d slot %0d", k, j, v, s));
        chk(wr_en[k] == wr_valid, "write enable follows wr_valid");
        seen[v][s]++;
        h = hc_coef(v, s, N_CA, N_DATA);
        chk(h != 0, "coefficient non-zero");
        hinv = (h == 1) ? 1 : 2;
        for (int z = 0; z < 3; z++) begin
          chk(cn_in[k][z] == temp[v][(z * hinv) % 3], "VN->CN permutation");
          chk(wr_llv[k][z] == cn_out[k][(z * h) % 3], "CN->VN permutation");
        end
      end
    end
    for (int i = 0; i < N_VA; i++)
      chk(seen[i][0] == 1 && seen[i][1] == 1, $sformatf("VN %0d served once per slot", i));
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
