// prng: PRNG evaluation-key generator, one generator per lane.
//
// Produces, every cycle gen is high, one row of LANES residues uniform mod q
// (up to a bias below q/2^64); these stand in for the uniformly random half
// of an evaluation key, so only a seed has to be fetched from memory.
// Each lane holds a 64-bit xorshift state, seeded by seed_load from a
// 32-bit seed and its lane number through a splitmix64 mixer. A 64-bit draw
// x = hi*2^32 + lo is reduced as hi*R^3 + lo*R^2 with Montgomery products
// (R = 2^32), which is x mod q in Montgomery form; R^3 is derived from the
// r2 input (R^2 mod q). Output is registered: one cycle latency.
// The paper adopts this unit from prior work without describing the
// generator; xorshift is a placeholder and is not cryptographically secure.
module prng
  import cifher_pkg::*;
#(
  parameter int unsigned LANES = 64
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    seed_load,
  input  word_t   seed,
  input  word_t   q,
  input  word_t   qinv,
  input  word_t   r2,
  input  logic    gen,
  output logic    out_valid,
  output word_t   y [LANES]
);
  function automatic logic [63:0] splitmix(logic [63:0] z);
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  function automatic logic [63:0] xorshift(logic [63:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 7);
    x = x ^ (x << 17);
    return x;
  endfunction

  word_t r3;
  mont_mul u_r3 (.a(r2), .b(r2), .q(q), .qinv(qinv), .r(r3));

  logic [63:0] st [LANES];
  word_t       yh [LANES];
  word_t       yl [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [63:0] init;
    assign init = splitmix({32'd0, seed} + 64'(l) * 64'h9E3779B97F4A7C15);
    mont_mul u_hi (.a(st[l][63:32]), .b(r3), .q(q), .qinv(qinv), .r(yh[l]));
    mont_mul u_lo (.a(st[l][31:0]),  .b(r2), .q(q), .qinv(qinv), .r(yl[l]));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          st[l] <= 64'd1 + 64'(l);
      else if (seed_load)  st[l] <= (init == '0) ? 64'd1 : init;
      else if (gen)        st[l] <= xorshift(st[l]);
    end
    always_ff @(posedge clk) if (gen) y[l] <= mod_add(yh[l], yl[l], q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= gen && !seed_load;
  end
endmodule
