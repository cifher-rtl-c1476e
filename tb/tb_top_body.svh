// tb_top_body.svh: body of the end-to-end testbench of cifher_top
// (tb_cifher_top), kept separate so that it can be reused at other sizes.
// The including module defines DX, DY, P, S, K, N, LW, NROWS and
// instantiates the DUT as `dut`. The I/O-die links are driven by the
// testbench (HBM loads as remote-write flits, with credits) and drained by
// it (stores, credits returned one cycle later).
// Scenario, with core A = (0,0) and core B = (DX-1,DY-1):
//   load limb x into A through the north I/O die of column 0, and limb z
//   into B through the south I/O die of column DX-1;
//   A: NTT(x), then SEND the result to B over the mesh (core to core);
//   B, at the same time: AUTO(z) with Galois element 5;
//   B: INTT of the received rows, SEND it to the south I/O die (store);
//   B: SEND AUTO(z) to the north I/O die (crosses the whole mesh);
//   core 1: EFU add and PRNG while the others run, results stored north.
// Checks: INTT(NTT(x)) = N*x after the trip over the mesh, AUTO(z) exactly, EFU and PRNG result ranges, and that every
// mechanism happened (counted in mech[], zero counts are failures), plus
// that at least two cores were busy in the same cycle.
  localparam int NC = DX * DY;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, ncyc = 0;
  logic cmd_valid [NC], cmd_ready [NC], idle [NC];
  cmd_t cmd [NC];
  logic            io_n_in_valid [DX], io_n_cr_out_valid [DX], io_n_out_valid [DX], io_n_cr_in_valid [DX];
  logic [VC_W-1:0] io_n_in_vc [DX], io_n_cr_out_vc [DX], io_n_out_vc [DX], io_n_cr_in_vc [DX];
  flit_hdr_t       io_n_in_hdr [DX], io_n_out_hdr [DX];
  word_t           io_n_in_data [DX][LW], io_n_out_data [DX][LW];
  logic            io_s_in_valid [DX], io_s_cr_out_valid [DX], io_s_out_valid [DX], io_s_cr_in_valid [DX];
  logic [VC_W-1:0] io_s_in_vc [DX], io_s_cr_out_vc [DX], io_s_out_vc [DX], io_s_cr_in_vc [DX];
  flit_hdr_t       io_s_in_hdr [DX], io_s_out_hdr [DX];
  word_t           io_s_in_data [DX][LW], io_s_out_data [DX][LW];

  w32 rxn [int][LW], rxs [int][LW];   // stored rows by address, north / south
  int nrxn = 0, nrxs = 0;
  int credn [DX][NVC], creds [DX][NVC];
  int mech [string];
  int busy2 = 0;

  logic crn_p [DX], crs_p [DX];
  logic [VC_W-1:0] crn_v [DX], crs_v [DX];
  always @(negedge clk) begin
    int nbusy;
    ncyc++;
    nbusy = 0;
    for (int c = 0; c < NC; c++) if (rst_n && !idle[c]) nbusy++;
    if (nbusy >= 2) busy2++;
    for (int x = 0; x < DX; x++) begin
      io_n_cr_in_valid[x] = crn_p[x]; io_n_cr_in_vc[x] = crn_v[x]; crn_p[x] = 0;
      io_s_cr_in_valid[x] = crs_p[x]; io_s_cr_in_vc[x] = crs_v[x]; crs_p[x] = 0;
      if (rst_n && io_n_out_valid[x]) begin
        for (int l = 0; l < LW; l++) rxn[int'(io_n_out_hdr[x].addr)][l] = io_n_out_data[x][l];
        nrxn++; crn_p[x] = 1; crn_v[x] = io_n_out_vc[x];
      end
      if (rst_n && io_s_out_valid[x]) begin
        for (int l = 0; l < LW; l++) rxs[int'(io_s_out_hdr[x].addr)][l] = io_s_out_data[x][l];
        nrxs++; crs_p[x] = 1; crs_v[x] = io_s_out_vc[x];
      end
      if (rst_n && io_n_cr_out_valid[x]) credn[x][io_n_cr_out_vc[x]]++;
      if (rst_n && io_s_cr_out_valid[x]) creds[x][io_s_cr_out_vc[x]]++;
    end
  end

  task automatic do_cmd(int c, cmd_t cm);
    @(negedge clk);
    cmd[c] = cm; cmd_valid[c] = 1;
    while (!cmd_ready[c]) @(negedge clk);
    @(negedge clk);
    cmd_valid[c] = 0;
    while (!idle[c]) @(negedge clk);
  endtask

  task automatic cfg_prime(int c, int idx, w32 q);
    cmd_t cm = '0;
    cm.op = OP_CFG_PRIME; cm.prime = 6'(idx);
    cm.sel = 3'(PF_Q);    cm.imm = q;                         do_cmd(c, cm);
    cm.sel = 3'(PF_QINV); cm.imm = neg_qinv(q);               do_cmd(c, cm);
    cm.sel = 3'(PF_R2);   cm.imm = r2_of(q);                  do_cmd(c, cm);
    cm.sel = 3'(PF_ROOT); cm.imm = to_mont(root_of(q, N), q); do_cmd(c, cm);
  endtask

  // HBM load: rows into core (cx,cy) through the I/O die of column col
  task automatic io_load(bit south, int col, int cx, int cy, int addr, ref w32 d [][LW]);
    int v = 0;
    for (int r = 0; r < d.size(); r++) begin
      @(negedge clk);
      while ((south ? creds[col][v] : credn[col][v]) == 0) @(negedge clk);
      if (south) begin
        io_s_in_valid[col] = 1; io_s_in_vc[col] = VC_W'(v);
        io_s_in_hdr[col] = '{dx: COORD_W'(cx), dy: COORD_W'(cy + 1), addr: ADDR_W'(addr + r)};
        for (int l = 0; l < LW; l++) io_s_in_data[col][l] = d[r][l];
        creds[col][v]--;
      end else begin
        io_n_in_valid[col] = 1; io_n_in_vc[col] = VC_W'(v);
        io_n_in_hdr[col] = '{dx: COORD_W'(cx), dy: COORD_W'(cy + 1), addr: ADDR_W'(addr + r)};
        for (int l = 0; l < LW; l++) io_n_in_data[col][l] = d[r][l];
        credn[col][v]--;
      end
      v = (v + 1) % NVC;
      @(negedge clk);
      io_s_in_valid[col] = 0; io_n_in_valid[col] = 0;
    end
    mech[south ? "io_load_south" : "io_load_north"]++;
  endtask

  function automatic void cmp(string what, w32 got [int][LW], int base, ref w32 expv [][LW]);
    int f0;
    f0 = failures;
    for (int r = 0; r < expv.size(); r++) for (int l = 0; l < LW; l++) begin
      checks++;
      if (!got.exists(base + r) || got[base + r][l] !== expv[r][l]) begin
        failures++;
        if (failures < 8) $display("%s row %0d lane %0d exp %0d", what, r, l, expv[r][l]);
      end
    end
    if (failures != f0) $display("%s: %0d mismatches", what, failures - f0);
  endfunction

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    w32 q, w, x [][LW], z [][LW], e [][LW], a1 [][LW];
    int A, B, BX, BY;
    cmd_t cm;
    q = 32'd998244353;
    w = root_of(q, N);
    A = 0; BX = DX - 1; BY = DY - 1; B = BY * DX + BX;
    for (int c = 0; c < NC; c++) begin cmd_valid[c] = 0; cmd[c] = '0; end
    for (int i = 0; i < DX; i++) begin
      io_n_in_valid[i] = 0; io_s_in_valid[i] = 0; io_n_in_vc[i] = 0; io_s_in_vc[i] = 0;
      io_n_in_hdr[i] = '0; io_s_in_hdr[i] = '0; crn_p[i] = 0; crs_p[i] = 0;
      io_n_cr_in_valid[i] = 0; io_s_cr_in_valid[i] = 0; io_n_cr_in_vc[i] = 0; io_s_cr_in_vc[i] = 0;
      for (int l = 0; l < LW; l++) begin io_n_in_data[i][l] = 0; io_s_in_data[i][l] = 0; end
      for (int v = 0; v < NVC; v++) begin credn[i][v] = 4; creds[i][v] = 4; end
    end
    x = new[NROWS]; z = new[NROWS]; a1 = new[2];
    for (int r = 0; r < NROWS; r++) for (int l = 0; l < LW; l++) begin
      x[r][l] = $urandom % q; z[r][l] = $urandom;
    end
    for (int r = 0; r < 2; r++) for (int l = 0; l < LW; l++) a1[r][l] = $urandom % q;
    repeat (3) @(posedge clk); rst_n <= 1;
    fork
      cfg_prime(A, 0, q);
      cfg_prime(B, 0, q);
      cfg_prime(1, 0, q);
    join
    fork
      io_load(0, 0, 0, 0, 0, x);
      io_load(1, BX, BX, BY, 0, z);
      io_load(0, 1, 1, 0, 100, a1);
    join
    fork
      begin
        cm = '0; cm.op = OP_NTT; cm.src0 = 0; cm.dst = ADDR_W'(NROWS);
        do_cmd(A, cm); mech["ntt"]++;
        cm = '0; cm.op = OP_SEND; cm.src0 = ADDR_W'(NROWS); cm.dst = ADDR_W'(2 * NROWS);
        cm.len = ADDR_W'(NROWS); cm.dx = COORD_W'(BX); cm.dy = COORD_W'(BY + 1);
        do_cmd(A, cm); mech["send_core_to_core"]++;
      end
      begin
        cmd_t cb;
        cb = '0; cb.op = OP_AUTO; cb.src0 = 0; cb.dst = ADDR_W'(4 * NROWS); cb.imm = 5;
        do_cmd(B, cb); mech["auto"]++;
      end
      begin
        cmd_t c1;
        c1 = '0; c1.op = OP_EFU; c1.sel = 3'(EFU_ADD); c1.src0 = 100; c1.src1 = 101; c1.dst = 110; c1.len = 1;
        do_cmd(1, c1); mech["efu"]++;
        c1 = '0; c1.op = OP_PRNG; c1.dst = 111; c1.len = 1; c1.imm = 9;
        do_cmd(1, c1); mech["prng"]++;
        c1 = '0; c1.op = OP_SEND; c1.src0 = 110; c1.dst = 110; c1.len = 2; c1.dx = 1; c1.dy = 0;
        do_cmd(1, c1);
      end
    join
    // wait until every NTT row has reached B: A's SEND ends when the rows
    // are injected; give the mesh time to deliver them
    repeat (NROWS + 50) @(negedge clk);
    cm = '0; cm.op = OP_INTT; cm.src0 = ADDR_W'(2 * NROWS); cm.dst = ADDR_W'(3 * NROWS);
    do_cmd(B, cm); mech["intt"]++;
    cm = '0; cm.op = OP_SEND; cm.src0 = ADDR_W'(3 * NROWS); cm.dst = 0; cm.len = ADDR_W'(NROWS);
    cm.dx = COORD_W'(BX); cm.dy = COORD_W'(DY + 1);
    do_cmd(B, cm);
    cm = '0; cm.op = OP_SEND; cm.src0 = ADDR_W'(4 * NROWS); cm.dst = ADDR_W'(4 * NROWS); cm.len = ADDR_W'(NROWS);
    cm.dx = COORD_W'(BX); cm.dy = 0;
    do_cmd(B, cm);
    while (nrxs < NROWS || nrxn < NROWS + 2) @(negedge clk);
    repeat (10) @(negedge clk);
    if (nrxs >= NROWS) mech["io_store_south"]++;
    if (nrxn >= NROWS + 2) mech["io_store_north"]++;
    // INTT(NTT(x)) = N*x
    e = new[NROWS];
    for (int r = 0; r < NROWS; r++) for (int l = 0; l < LW; l++) e[r][l] = mulmod(x[r][l], N, q);
    cmp("ntt_intt", rxs, 0, e);
    // AUTO(z): position (i*5) mod N holds z_i
    for (int i = 0; i < N; i++) begin
      int n;
      n = (i * 5) % N;
      e[layout_row(n, P, S)][layout_lane(n, P, S)] = z[layout_row(i, P, S)][layout_lane(i, P, S)];
    end
    cmp("auto", rxn, 4 * NROWS, e);
    // EFU add and PRNG range on core 1
    for (int l = 0; l < LW; l++) begin
      checks += 2;
      if (rxn[110][l] !== addmod(a1[0][l], a1[1][l], q)) failures++;
      if (rxn[111][l] >= q) failures++;
    end
    foreach (mech[m]) $display("mechanism %s: %0d", m, mech[m]);
    $display("cycles with two or more cores busy: %0d, total cycles %0d", busy2, ncyc);
    foreach (mech[m]) begin checks++; if (mech[m] == 0) failures++; end
    checks += 2;
    if (mech.num() != 10) failures++;
    if (busy2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
