// tb_nttu: NTTU with P = 4, S = 2 (N = 256, two submodules as in the
// paper's small example). Checks forward NTT and inverse NTT of random limbs
// against an O(N^2) reference DFT, including a back-to-back second limb,
// and checks the pass timing (row count per limb = N/(S*P)).
module tb_nttu;
  import tb_util_pkg::*;
  localparam int P = 4, S = 2, R = P*P, N = R*R, LW = S*P, NROWS = N/LW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cfg_valid = 0, mode = 0, in_valid = 0, in_ready, out_valid, busy;
  w32 cfg_q, cfg_qinv, cfg_r2, cfg_root;
  w32 in_data [LW];
  w32 out_data [LW];

  nttu #(.P(P), .S(S)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int idx_of(int t, int lane);
    int u = t / P, c = t % P, s = lane / P, l = lane % P;
    return (S*u + s) + R*(c + P*l);
  endfunction

  w32 q, w, x [N], y [N], got [N];
  int ocnt, first_in, last_out;

  task automatic run(input bit inv, input w32 wr);
    // reference
    for (int k = 0; k < N; k++) begin
      w32 acc = 0;
      for (int j = 0; j < N; j++) acc = addmod(acc, mulmod(x[j], powmod(wr, longint'(j)*k % N, q), q), q);
      y[k] = acc;
    end
    ocnt = 0;
    fork
      begin
        for (int t = 0; t < NROWS; t++) begin
          while (!in_ready) begin in_valid <= 0; @(posedge clk); end
          in_valid <= 1; mode <= inv;
          for (int ln = 0; ln < LW; ln++) in_data[ln] <= x[idx_of(t, ln)];
          if (t == 0) first_in = cyc;
          @(posedge clk);
        end
        in_valid <= 0;
      end
      begin
        while (ocnt < NROWS) begin
          @(posedge clk);
          if (out_valid) begin
            for (int ln = 0; ln < LW; ln++) got[idx_of(ocnt, ln)] = out_data[ln];
            ocnt++;
            last_out = cyc;
          end
        end
      end
    join
    for (int k = 0; k < N; k++) begin
      checks++;
      if (got[k] !== y[k]) begin
        failures++;
        if (failures < 5 || k == 0) $display("mismatch inv=%0d k=%0d got %0d exp %0d", inv, k, got[k], y[k]);
      end
    end
  endtask

  initial begin
    q = 998244353;
    w = root_of(q, N);
    cfg_q = q; cfg_qinv = neg_qinv(q); cfg_r2 = r2_of(q); cfg_root = to_mont(w, q);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    cfg_valid <= 1; @(posedge clk); cfg_valid <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    for (int i = 0; i < N; i++) x[i] = $urandom % q;
    run(0, w);
    // pass timing: a limb streams in and out in NROWS cycles each
    checks++;
    if ((last_out - first_in) > 2*NROWS + 60) begin
      failures++; $display("latency too long: %0d cycles", (last_out - first_in));
    end
    for (int i = 0; i < N; i++) x[i] = $urandom % q;
    run(1, powmod(w, N - 1, q));
    for (int i = 0; i < N; i++) x[i] = $urandom % q;
    run(0, w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
