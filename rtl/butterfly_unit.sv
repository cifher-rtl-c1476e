// butterfly_unit: modular butterfly for (i)NTT (combinational).
//
// mode = 0 (NTT, Cooley-Tukey):      x = a + b*w,  y = a - b*w
// mode = 1 (iNTT, Gentleman-Sande):  x = a + b,    y = (a - b)*w
// These are the two butterfly forms the paper gives. The twiddle w is in
// Montgomery form, so the Montgomery product b*w*2^-32 is the true product.
// All values are reduced mod q. One multiplier is shared by both modes.
module butterfly_unit
  import cifher_pkg::*;
(
  input  logic  mode,
  input  word_t a,
  input  word_t b,
  input  word_t w,
  input  word_t q,
  input  word_t qinv,
  output word_t x,
  output word_t y
);
  word_t mul_in, prod, diff;

  assign diff   = mod_sub(a, b, q);
  assign mul_in = mode ? diff : b;

  mont_mul u_mul (.a(mul_in), .b(w), .q(q), .qinv(qinv), .r(prod));

  always_comb begin
    if (!mode) begin
      x = mod_add(a, prod, q);
      y = mod_sub(a, prod, q);
    end else begin
      x = mod_add(a, b, q);
      y = prod;
    end
  end
endmodule
