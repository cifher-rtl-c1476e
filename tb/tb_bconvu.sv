// tb_bconvu: LANES = 4, K = 12 (the paper's 1x12 chain), ell = 5 and 14.
// Loads a random table, streams several row groups (group starts K cycles
// apart when ell < K, back to back when ell >= K) and checks each output
// limb j against sum_i T[j][i]*v[i] mod p_j, its order j = 0..K-1 and the
// drain timing (output j two cycles after the last row reaches MAC j).
module tb_bconvu;
  import tb_util_pkg::*;
  localparam int L = 4, K = 12, LM = 48, G = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic tbl_we = 0, in_valid = 0, in_first = 0, in_last = 0, out_valid;
  logic [3:0] tbl_j, out_j;
  logic [5:0] tbl_i, in_idx;
  w32 tbl_data, p [K], pinv [K], in_data [L], out_data [L];
  bconvu #(.LANES(L), .K(K), .LM(LM)) dut (.*);
  w32 T [K][LM], v [G][LM][L], e [G][K][L];
  int og, oj, t_last [G];
  int last_seen = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (in_valid && in_last) begin t_last[last_seen] = cyc; last_seen++; end
  always @(posedge clk) if (out_valid) begin
    checks++;
    if (out_j !== 4'(oj)) failures++;
    checks++;
    if (cyc - t_last[og] != oj + 2) begin
      failures++; if (failures < 5) $display("timing j=%0d %0d", oj, cyc - t_last[og]);
    end
    for (int l = 0; l < L; l++) begin
      checks++;
      if (out_data[l] !== e[og][oj][l]) begin
        failures++;
        if (failures < 5) $display("g %0d j %0d l %0d got %0d exp %0d", og, oj, l, out_data[l], e[og][oj][l]);
      end
    end
    oj++;
    if (oj == K) begin oj = 0; og++; end
  end
  task automatic run(int ell);
    og = 0; oj = 0; last_seen = 0;
    for (int g = 0; g < G; g++) for (int i = 0; i < ell; i++) for (int l = 0; l < L; l++) v[g][i][l] = $urandom;
    for (int g = 0; g < G; g++) for (int j = 0; j < K; j++) for (int l = 0; l < L; l++) begin
      w32 acc = 0;
      for (int i = 0; i < ell; i++) acc = addmod(acc, mulmod(32'(64'(v[g][i][l]) % 64'(p[j])), T[j][i], p[j]), p[j]);
      e[g][j][l] = acc;
    end
    for (int g = 0; g < G; g++) begin
      for (int i = 0; i < ((ell > K) ? ell : K); i++) begin
        in_valid <= (i < ell); in_first <= (i == 0); in_last <= (i == ell - 1); in_idx <= 6'(i);
        for (int l = 0; l < L; l++) in_data[l] <= v[g][i % LM][l];
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (K + 6) @(posedge clk);
    checks++;
    if (og != G) begin failures++; $display("groups out %0d", og); end
  endtask
  initial begin
    w32 primes [K];
    for (int j = 0; j < K; j++) begin
      p[j] = (j % 2) ? 32'd998244353 : 32'd2013265921;
      if (j == 5) p[j] = 32'd4293918721;
      pinv[j] = neg_qinv(p[j]);
    end
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int j = 0; j < K; j++) for (int i = 0; i < LM; i++) begin
      T[j][i] = $urandom % p[j];
      tbl_we <= 1; tbl_j <= 4'(j); tbl_i <= 6'(i); tbl_data <= to_mont(T[j][i], p[j]);
      @(posedge clk);
    end
    tbl_we <= 0;
    run(5);
    run(14);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
