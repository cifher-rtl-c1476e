// mont_mul: 32-bit Montgomery modular multiplier (combinational).
//
// r = a * b * 2^-32 mod q for odd q < 2^32 and a, b < q. The product T = a*b is
// reduced with m = (T mod 2^32) * qinv mod 2^32, where qinv = -q^-1 mod 2^32,
// t = (T + m*q) / 2^32 < 2q, and one conditional subtraction. With one operand
// in Montgomery form (x*2^32 mod q) the result is the ordinary product, which
// is how twiddle factors and table entries are kept throughout the design.
//
// The paper uses a word-level Montgomery circuit with a signed-Montgomery
// refinement for every modular reduction; that circuit's internals are not
// given, so this is the textbook unsigned Montgomery reduction with the same
// function. It is combinational; users register its output.
module mont_mul
  import cifher_pkg::*;
(
  input  word_t a,
  input  word_t b,
  input  word_t q,
  input  word_t qinv,
  output word_t r
);
  logic [63:0] t_prod;
  logic [31:0] m;
  logic [64:0] t_sum;
  logic [32:0] t_hi;

  always_comb begin
    t_prod = 64'(a) * 64'(b);
    m      = t_prod[31:0] * qinv;
    t_sum  = {1'b0, t_prod} + 65'(64'(m) * 64'(q));
    t_hi   = t_sum[64:32];
    if (t_hi >= {1'b0, q}) r = 32'(t_hi - {1'b0, q});
    else                   r = t_hi[31:0];
  end
endmodule
