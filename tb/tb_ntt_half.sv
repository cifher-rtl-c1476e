// tb_ntt_half: P = 4 (R = 16-point DFT). Streams back-to-back sequences in
// forward mode with root w and then in inverse mode with root w^-1, and
// compares with a reference O(R^2) DFT; also checks the latency from the
// last input vector of a sequence to its first output (2*log2 P + 3: log2 P column registers per step, the twist register, the transpose register).
module tb_ntt_half;
  import tb_util_pkg::*;
  localparam int P = 4, R = P*P, NSEQ = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic mode = 0, in_valid = 0, out_valid;
  w32 q, qinv, wpow [R], in_data [P], out_data [P];
  ntt_half #(.P(P)) dut (.*);
  w32 x [NSEQ][R], y [NSEQ][R];
  int os, oc, t_last, t_first;
  int in_rows = 0;
  always @(posedge clk) if (in_valid) begin
    if (in_rows == P - 1) t_last = cyc;
    in_rows++;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic run(bit inv);
    w32 w = root_of(q, R);
    if (inv) w = powmod(w, R - 1, q);
    for (int e = 0; e < R; e++) wpow[e] = to_mont(powmod(w, e, q), q);
    mode = inv;
    for (int s = 0; s < NSEQ; s++) for (int j = 0; j < R; j++) x[s][j] = $urandom % q;
    for (int s = 0; s < NSEQ; s++) for (int k = 0; k < R; k++) begin
      w32 acc = 0;
      for (int j = 0; j < R; j++) acc = addmod(acc, mulmod(x[s][j], powmod(w, j*k, q), q), q);
      y[s][k] = acc;
    end
    os = 0; oc = 0; t_first = -1; in_rows = 0;
    fork
      begin
        for (int s = 0; s < NSEQ; s++) for (int c = 0; c < P; c++) begin
          in_valid <= 1;
          for (int l = 0; l < P; l++) in_data[l] <= x[s][c + P*l];
          @(posedge clk);
        end
        in_valid <= 0;
      end
      while (os < NSEQ) begin
        @(posedge clk);
        if (out_valid) begin
          if (t_first < 0) t_first = cyc;
          for (int l = 0; l < P; l++) begin
            checks++;
            if (out_data[l] !== y[os][oc + P*l]) failures++;
          end
          oc++;
          if (oc == P) begin oc = 0; os++; end
        end
      end
    join
    checks++;
    if (t_first - t_last != 2*$clog2(P) + 3) begin
      failures++; $display("latency %0d", t_first - t_last);
    end
  endtask
  initial begin
    q = 998244353; qinv = neg_qinv(q);
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    run(0);
    repeat (40) @(posedge clk);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
