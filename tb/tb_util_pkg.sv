// tb_util_pkg: reference modular arithmetic for the testbenches, written
// with plain 64/128-bit integer arithmetic, independent of the Montgomery
// datapath under test.
package tb_util_pkg;
  typedef logic [31:0] w32;

  function automatic w32 mulmod(w32 a, w32 b, w32 q);
    logic [63:0] p;
    p = 64'(a) * 64'(b);
    return 32'(p % 64'(q));
  endfunction

  function automatic w32 addmod(w32 a, w32 b, w32 q);
    return 32'((64'(a) + 64'(b)) % 64'(q));
  endfunction

  function automatic w32 submod(w32 a, w32 b, w32 q);
    return 32'((64'(a) + 64'(q) - 64'(b)) % 64'(q));
  endfunction

  function automatic w32 powmod(w32 b, longint unsigned e, w32 q);
    w32 r = 1;
    w32 x = 32'(64'(b) % 64'(q));
    while (e != 0) begin
      if (e[0]) r = mulmod(r, x, q);
      x = mulmod(x, x, q);
      e >>= 1;
    end
    return r;
  endfunction

  // x * 2^32 mod q
  function automatic w32 to_mont(w32 x, w32 q);
    logic [95:0] t;
    t = {x, 32'd0};
    return 32'(t % 96'(q));
  endfunction

  // -q^-1 mod 2^32 (q odd), by Newton iteration
  function automatic w32 neg_qinv(w32 q);
    w32 x = q;
    for (int i = 0; i < 5; i++) x = x * (32'd2 - q * x);
    return -x;
  endfunction

  function automatic w32 r2_of(w32 q);
    logic [95:0] t;
    t = 96'd1 << 64;
    return 32'(t % 96'(q));
  endfunction

  // primitive n-th root of unity (n a power of two dividing q-1), from a
  // quadratic non-residue
  function automatic w32 root_of(w32 q, longint unsigned n);
    for (w32 g = 2; g < 1000; g++)
      if (powmod(g, (64'(q) - 1) / 2, q) != 1) return powmod(g, (64'(q) - 1) / n, q);
    return 0;
  endfunction
endpackage
