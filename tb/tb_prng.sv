// tb_prng: LANES = 4. Re-implements the seeding, the xorshift generator and
// the reduction (x mod q, in Montgomery form) in plain arithmetic and
// compares every output; also checks that reseeding reproduces the stream
// and that every output is below q.
module tb_prng;
  import tb_util_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic seed_load = 0, gen = 0, out_valid;
  w32 seed, q, qinv, r2, y [L];
  prng #(.LANES(L)) dut (.*);
  logic [63:0] st [L];
  function automatic logic [63:0] mix(logic [63:0] z);
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  w32 first [L];
  initial begin
    q = 4293918721; qinv = neg_qinv(q); r2 = r2_of(q);
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int rep = 0; rep < 2; rep++) begin
      seed = 32'h1234_5678;
      seed_load = 1; @(posedge clk); #1; seed_load = 0;
      for (int l = 0; l < L; l++) st[l] = mix(64'(seed) + 64'(l) * 64'h9E3779B97F4A7C15);
      for (int i = 0; i < 100; i++) begin
        gen = 1; @(posedge clk); #1; gen = 0;
        checks++;
        if (!out_valid) failures++;
        for (int l = 0; l < L; l++) begin
          logic [127:0] t;
          w32 e;
          t = {64'd0, st[l]} % 128'(q);      // x mod q
          e = to_mont(32'(t), q);            // in Montgomery form
          checks += 2;
          if (y[l] !== e) begin
            failures++;
            if (failures < 5) $display("lane %0d step %0d got %h exp %h", l, i, y[l], e);
          end
          if (y[l] >= q) failures++;
          if (i == 0) begin
            if (rep == 0) first[l] = y[l];
            else begin checks++; if (first[l] !== y[l]) failures++; end
          end
          st[l] = st[l] ^ (st[l] << 13);
          st[l] = st[l] ^ (st[l] >> 7);
          st[l] = st[l] ^ (st[l] << 17);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
