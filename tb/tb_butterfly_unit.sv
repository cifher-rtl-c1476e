// tb_butterfly_unit: random butterflies in both modes against the equations
// NTT: (a + b*w, a - b*w) and iNTT: (a + b, (a - b)*w) mod q.
module tb_butterfly_unit;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic mode;
  w32 a, b, w, q, qinv, x, y;
  butterfly_unit dut (.*);
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    q = 4293918721; qinv = neg_qinv(q);
    for (int i = 0; i < 1000; i++) begin
      w32 wv, ex, ey;
      mode = i[0];
      a = $urandom % q; b = $urandom % q; wv = $urandom % q; w = to_mont(wv, q);
      #1;
      if (!mode) begin
        ex = addmod(a, mulmod(b, wv, q), q); ey = submod(a, mulmod(b, wv, q), q);
      end else begin
        ex = addmod(a, b, q); ey = mulmod(submod(a, b, q), wv, q);
      end
      checks += 2;
      if (x !== ex) failures++;
      if (y !== ey) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
