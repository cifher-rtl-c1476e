// tb_core: one core with P = 2, S = 2 (N = 16, 4 lanes, 4 rows per limb),
// K = 12, small RFs, at mesh position (0,1). All data enters as NoP flits
// on the north link (remote writes into the RF, with credit flow control)
// and all results leave with SEND micro-operations back to the north link,
// where the testbench collects them and returns credits. Checks, against
// plain reference arithmetic: NTT, INTT (NTT then INTT = N*x), the EFU
// operations, the automorphism, BConv (ell = 3 into K = 12 moduli), PRNG
// (same generator as tb_prng), the auxiliary RF, and that every mechanism
// ran. Also checks the NTT pass time (issue of first row to idle).
module tb_core;
  import tb_util_pkg::*;
  import cifher_pkg::*;
  localparam int P = 2, S = 2, N = 16, LW = 4, NROWS = 4, K = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, ncyc = 0;
  logic [COORD_W-1:0] my_x = 0, my_y = 1;
  logic cmd_valid = 0, cmd_ready, idle;
  cmd_t cmd;
  logic l_in_valid [4], l_cr_out_valid [4], l_out_valid [4], l_cr_in_valid [4];
  logic [VC_W-1:0] l_in_vc [4], l_cr_out_vc [4], l_out_vc [4], l_cr_in_vc [4];
  flit_hdr_t l_in_hdr [4], l_out_hdr [4];
  word_t l_in_data [4][LW], l_out_data [4][LW];
  core #(.P(P), .S(S), .K(K), .SP_DEPTH(256), .AUX_DEPTH(64)) dut (.*);

  w32 qs [13];
  w32 rx [int][LW];          // rows received on the north link, by address
  int nrx = 0;
  int cred [NVC];
  int mech [string];

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // link monitor: collect flits, return each credit one cycle later
  logic cr_pend; logic [VC_W-1:0] cr_pend_vc;
  always @(negedge clk) begin
    ncyc++;
    for (int d = 0; d < 4; d++) begin l_cr_in_valid[d] = 0; l_cr_in_vc[d] = 0; end
    if (cr_pend) begin l_cr_in_valid[0] = 1; l_cr_in_vc[0] = cr_pend_vc; end
    cr_pend = 0;
    if (rst_n && l_out_valid[0]) begin
      for (int l = 0; l < LW; l++) rx[int'(l_out_hdr[0].addr)][l] = l_out_data[0][l];
      nrx++; cr_pend = 1; cr_pend_vc = l_out_vc[0];
    end
    for (int d = 1; d < 4; d++) if (rst_n && l_out_valid[d]) begin
      failures++; $display("flit on wrong link %0d", d);
    end
    if (rst_n && l_cr_out_valid[0]) cred[l_cr_out_vc[0]]++;
  end

  task automatic do_cmd(cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!idle) @(negedge clk);
  endtask

  task automatic cfg_prime(int idx, w32 q);
    cmd_t c = '0;
    c.op = OP_CFG_PRIME; c.prime = 6'(idx);
    c.sel = 3'(PF_Q);    c.imm = q;                         do_cmd(c);
    c.sel = 3'(PF_QINV); c.imm = neg_qinv(q);               do_cmd(c);
    c.sel = 3'(PF_R2);   c.imm = r2_of(q);                  do_cmd(c);
    c.sel = 3'(PF_ROOT); c.imm = to_mont(root_of(q, N), q); do_cmd(c);
  endtask

  // write rows through the north link (remote writes)
  task automatic put_rows(int addr, w32 d [][LW]);
    int v = 0;
    foreach (d[r]) begin
      @(negedge clk);
      while (cred[v] == 0) @(negedge clk);
      l_in_valid[0] = 1; l_in_vc[0] = VC_W'(v);
      l_in_hdr[0] = '{dx: 0, dy: 1, addr: ADDR_W'(addr + r)};
      for (int l = 0; l < LW; l++) l_in_data[0][l] = d[r][l];
      cred[v]--;
      v = (v + 1) % NVC;
      @(negedge clk);
      l_in_valid[0] = 0;
      mech["remote_write"]++;
    end
  endtask

  // read rows back with SEND to the north I/O position (0,0)
  task automatic get_rows(int addr, int len, output w32 d [][LW]);
    cmd_t c = '0;
    int n0 = nrx;
    c.op = OP_SEND; c.src0 = ADDR_W'(addr); c.dst = ADDR_W'(addr); c.len = ADDR_W'(len);
    c.dx = 0; c.dy = 0;
    do_cmd(c);
    while (nrx < n0 + len) @(negedge clk);
    d = new[len];
    for (int r = 0; r < len; r++) d[r] = rx[addr + r];
    mech["send"]++;
  endtask

  function automatic void cmp(string what, w32 got [][LW], w32 expv [][LW]);
    int f0 = failures;
    foreach (expv[r, l]) begin
      checks++;
      if (got[r][l] !== expv[r][l]) begin
        failures++;
        if (failures < 8) $display("%s row %0d lane %0d got %0d exp %0d", what, r, l, got[r][l], expv[r][l]);
      end
    end
    if (failures != f0) $display("%s: %0d mismatches", what, failures - f0);
  endfunction

  function automatic logic [63:0] mix(logic [63:0] z);
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  initial begin
    w32 q, w, x [][LW], y [][LW], e [][LW], b [][LW], c3 [][LW], bi [][LW], T [K][3];
    cmd_t c;
    int t0;
    for (int d = 0; d < 4; d++) begin l_in_valid[d] = 0; l_in_vc[d] = 0; l_in_hdr[d] = '0; end
    for (int d = 0; d < 4; d++) for (int l = 0; l < LW; l++) l_in_data[d][l] = 0;
    for (int v = 0; v < NVC; v++) cred[v] = 4;
    cr_pend = 0;
    cmd = '0;
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int i = 0; i < 13; i++) begin
      qs[i] = (i % 3 == 0) ? 32'd998244353 : (i % 3 == 1) ? 32'd2013265921 : 32'd4293918721;
      cfg_prime(i, qs[i]);
    end
    q = qs[0]; w = root_of(q, N);
    x = new[NROWS]; e = new[NROWS];
    foreach (x[r, l]) x[r][l] = $urandom % q;
    put_rows(0, x);
    // --- NTT: rows 0..3 -> 16..19
    c = '0; c.op = OP_NTT; c.prime = 0; c.src0 = 0; c.dst = 16;
    t0 = ncyc;
    do_cmd(c);
    checks++;
    if (ncyc - t0 > 3 * NROWS + 40 + N) begin failures++; $display("NTT took %0d", ncyc - t0); end
    get_rows(16, NROWS, y);
    for (int k = 0; k < N; k++) begin
      w32 acc;
      acc = 0;
      for (int j = 0; j < N; j++)
        acc = addmod(acc, mulmod(x[layout_row(j, P, S)][layout_lane(j, P, S)], powmod(w, (j * k) % N, q), q), q);
      e[layout_row(k, P, S)][layout_lane(k, P, S)] = acc;
    end
    cmp("ntt", y, e); mech["ntt"]++;

    // --- INTT: 16..19 -> 20..23, expect N*x
    c.op = OP_INTT; c.src0 = 16; c.dst = 20;
    do_cmd(c);
    get_rows(20, NROWS, y);
    foreach (e[r, l]) e[r][l] = mulmod(x[r][l], N, q);
    cmp("intt", y, e); mech["intt"]++;
    // --- AUTO with Galois element 5: 0..3 -> 24..27
    c = '0; c.op = OP_AUTO; c.src0 = 0; c.dst = 24; c.imm = 5;
    do_cmd(c);
    get_rows(24, NROWS, y);
    for (int i = 0; i < N; i++) begin
      int n;
      n = (i * 5) % N;
      e[layout_row(n, P, S)][layout_lane(n, P, S)] = x[layout_row(i, P, S)][layout_lane(i, P, S)];
    end
    cmp("auto", y, e); mech["auto"]++;
    // --- EFU: MULADD into the auxiliary RF, a = x, b (Montgomery) , c
    b = new[NROWS]; c3 = new[NROWS]; bi = new[NROWS];
    foreach (b[r, l]) begin bi[r][l] = $urandom % q; b[r][l] = to_mont(bi[r][l], q); c3[r][l] = $urandom % q; end
    put_rows(32, b);
    put_rows(36, c3);
    c = '0; c.op = OP_EFU; c.sel = 3'(EFU_MULADD); c.prime = 0;
    c.src0 = 0; c.src1 = 32; c.src2 = 36; c.dst = ADDR_W'((1 << (ADDR_W - 1)) + 4); c.len = NROWS;
    do_cmd(c);
    get_rows((1 << (ADDR_W - 1)) + 4, NROWS, y);
    foreach (e[r, l]) e[r][l] = addmod(mulmod(x[r][l], bi[r][l], q), c3[r][l], q);
    cmp("efu_muladd", y, e); mech["efu"]++; mech["aux_rf"]++;
    c.sel = 3'(EFU_SUB); c.dst = 40;
    do_cmd(c);
    get_rows(40, NROWS, y);
    foreach (e[r, l]) e[r][l] = submod(x[r][l], b[r][l], q);
    cmp("efu_sub", y, e);
    // --- BConv: ell = 3 limbs of 4 rows at 48, 52, 56 -> 12 limbs at 64..
    for (int j = 0; j < K; j++) for (int i = 0; i < 3; i++) begin
      T[j][i] = $urandom % qs[1 + j];
      c = '0; c.op = OP_CFG_BTBL; c.src0 = ADDR_W'(j); c.src1 = ADDR_W'(i); c.imm = to_mont(T[j][i], qs[1 + j]);
      do_cmd(c);
    end
    begin
      w32 v3 [3][NROWS][LW];
      for (int i = 0; i < 3; i++) begin
        w32 d [][LW];
        d = new[NROWS];
        foreach (d[r, l]) begin d[r][l] = $urandom; v3[i][r][l] = d[r][l]; end
        put_rows(48 + 4 * i, d);
      end
      c = '0; c.op = OP_BCONV; c.prime = 1; c.src0 = 48; c.dst = 64; c.len = NROWS; c.imm = 3;
      do_cmd(c);
      get_rows(64, K * NROWS, y);
      e = new[K * NROWS];
      for (int j = 0; j < K; j++) for (int r = 0; r < NROWS; r++) for (int l = 0; l < LW; l++) begin
        w32 acc;
        acc = 0;
        for (int i = 0; i < 3; i++)
          acc = addmod(acc, mulmod(32'(64'(v3[i][r][l]) % 64'(qs[1 + j])), T[j][i], qs[1 + j]), qs[1 + j]);
        e[j * NROWS + r][l] = acc;
      end
      cmp("bconv", y, e); mech["bconv"]++;
    end
    // --- PRNG: 4 rows with seed 77, modulus index 2 -> 120..123
    begin
      logic [63:0] st [LW];
      w32 q2;
      q2 = qs[2];
      c = '0; c.op = OP_PRNG; c.prime = 2; c.dst = 120; c.len = NROWS; c.imm = 77;
      do_cmd(c);
      get_rows(120, NROWS, y);
      for (int l = 0; l < LW; l++) st[l] = mix(64'd77 + 64'(l) * 64'h9E3779B97F4A7C15);
      for (int r = 0; r < NROWS; r++) for (int l = 0; l < LW; l++) begin
        e[r][l] = to_mont(32'({64'd0, st[l]} % 64'(q2)), q2);
        st[l] = st[l] ^ (st[l] << 13);
        st[l] = st[l] ^ (st[l] >> 7);
        st[l] = st[l] ^ (st[l] << 17);
      end
      e = new[NROWS](e);
      cmp("prng", y, e); mech["prng"]++;
    end
    foreach (mech[m]) $display("mechanism %s: %0d", m, mech[m]);
    foreach (mech[m]) begin checks++; if (mech[m] == 0) failures++; end
    checks++;
    if (mech.num() != 9) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
