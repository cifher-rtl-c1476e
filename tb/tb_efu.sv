// tb_efu: LANES = 8. Random rows through every operation, checked against
// reference modular arithmetic, including the one-cycle latency.
module tb_efu;
  import tb_util_pkg::*;
  import cifher_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  efu_op_e op;
  w32 q, qinv, a [L], b [L], c [L], y [L];
  w32 exp_y [L];
  efu #(.LANES(L)) dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    q = 2013265921; qinv = neg_qinv(q);
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int i = 0; i < 140; i++) begin
      efu_op_e o;
      o = efu_op_e'(i % 7);
      for (int l = 0; l < L; l++) begin
        w32 av, bv, cv;
        av = $urandom % q; bv = $urandom % q; cv = $urandom % q;
        a[l] = av; b[l] = to_mont(bv, q); c[l] = cv;
        case (o)
          EFU_ADD:    exp_y[l] = addmod(av, b[l], q);
          EFU_SUB:    exp_y[l] = submod(av, b[l], q);
          EFU_MUL:    exp_y[l] = mulmod(av, bv, q);
          EFU_MULADD: exp_y[l] = addmod(mulmod(av, bv, q), cv, q);
          EFU_MULSUB: exp_y[l] = submod(cv, mulmod(av, bv, q), q);
          EFU_NEG:    exp_y[l] = submod(0, av, q);
          default:    exp_y[l] = av;
        endcase
      end
      op = o; in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (y[l] !== exp_y[l]) begin
          failures++;
          if (failures < 5) $display("op %0d lane %0d got %0d exp %0d", o, l, y[l], exp_y[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
