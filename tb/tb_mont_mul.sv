// tb_mont_mul: random operands under three 32-bit NTT primes; checks
// mont_mul(a, b*2^32 mod q) == a*b mod q against 64-bit reference arithmetic,
// plus the extreme operands q-1 and 0.
module tb_mont_mul;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  w32 a, b, q, qinv, r;
  mont_mul dut (.a(a), .b(b), .q(q), .qinv(qinv), .r(r));
  w32 qs [3] = '{32'd998244353, 32'd4293918721, 32'd2013265921};
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < 3; k++) begin
      q = qs[k]; qinv = neg_qinv(q);
      for (int i = 0; i < 400; i++) begin
        w32 x, y;
        x = (i == 0) ? q - 1 : (i == 1) ? 0 : $urandom % q;
        y = (i == 0) ? q - 1 : $urandom % q;
        a = x; b = to_mont(y, q);
        #1;
        checks++;
        if (r !== mulmod(x, y, q)) begin
          failures++;
          if (failures < 5) $display("q=%0d %0d*%0d got %0d exp %0d", q, x, y, r, mulmod(x, y, q));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
