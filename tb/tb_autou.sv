// tb_autou: P = 2, S = 2 (N = 16, 4 lanes, 4 rows) and P = 4, S = 2 is not
// needed: the map is size independent. Sends limbs with several odd Galois
// elements (5^r mod N) back to back and checks out[(i*k) mod N] == in[i]
// in the shared row layout, and the two-cycle fill-to-drain latency.
module tb_autou;
  import tb_util_pkg::*;
  import cifher_pkg::*;
  localparam int P = 2, S = 2, N = 16, LW = 4, NR = N / LW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  // all monitoring happens at the falling edge, where inputs and outputs
  // are stable; cyc counts falling edges
  always @(negedge clk) cyc <= cyc + 1;
  logic in_valid = 0, in_ready, out_valid, busy;
  w32 galois, in_data [LW], out_data [LW];
  autou #(.P(P), .S(S)) dut (.*);
  w32 x [4][N];
  int ks [4] = '{5, 25, 13, 1};
  int ob = 0, orow = 0, lastin [4], nin = 0;
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (in_valid && in_ready) begin
    nin++;
    if (nin % NR == 0) lastin[nin / NR - 1] = cyc;
  end
  always @(negedge clk) if (out_valid) begin
    if (orow == 0) begin checks++; if (cyc - lastin[ob] != 2) begin failures++; $display("lat %0d", cyc - lastin[ob]); end end
    for (int l = 0; l < LW; l++) begin
      int n;
      n = layout_idx(orow, l, P, S);
      checks++;
      // out position n holds the input coefficient i with i*k = n mod N
      for (int i = 0; i < N; i++)
        if ((i * ks[ob]) % N == n && out_data[l] !== x[ob][i]) begin failures++; if (failures < 6) $display("b%0d row%0d l%0d n%0d i%0d got %h exp %h", ob, orow, l, n, i, out_data[l], x[ob][i]); end
    end
    orow++;
    if (orow == NR) begin orow = 0; ob++; end
  end
  initial begin
    for (int b = 0; b < 4; b++) for (int i = 0; i < N; i++) x[b][i] = $urandom;
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int b = 0; b < 4; b++) begin
      for (int t = 0; t < NR; t++) begin
        // drive at the falling edge, hold until accepted at a rising edge
        @(negedge clk);
        in_valid = 1; galois = ks[b];
        for (int l = 0; l < LW; l++) in_data[l] = x[b][layout_idx(t, l, P, S)];
        while (!in_ready) @(negedge clk);
        @(posedge clk);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (ob != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
