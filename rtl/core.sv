// core: one chiplet core. It holds the functional units (composable NTTU,
// systolic BConvU, AutoU, EFU, PRNG), the scratchpad and auxiliary register
// files, the NoP router and one PHY per mesh direction, and a sequencer that
// executes micro-operations (cifher_pkg::cmd_t) one at a time.
//
// Data is kept as rows of LANES = S*P words; a limb of N coefficients is
// N/LANES rows in the NTTU layout. Row addresses are ADDR_W bits; the MSB
// selects the auxiliary RF. Micro-operations:
//   NTT/INTT  src0 -> dst, one limb, modulus cmd.prime (the NTTU regenerates
//             its twiddles when the prime changes)
//   EFU       dst[r] = f(src0[r], src1[r], src2[r]), r < len, f = cmd.sel
//   BCONV     ell = imm input limbs at src0 + i*len, K output limbs at
//             dst + j*len, output moduli prime .. prime+K-1
//   AUTO      src0 -> dst, Galois element imm
//   PRNG      len rows of uniform residues, seed imm
//   SEND      len rows src0.. to core (dx,dy), rows dst.. of its RF
//   CFG_PRIME prime-table field sel of entry prime = imm
//   CFG_BTBL  BConv table entry [src0][src1] = imm
// Flits arriving from the NoP are written straight into the RF row named in
// their header (a remote write), independently of the sequencer.
// Interface: cmd_valid/cmd_ready handshake; idle is high when no operation
// is running. NoP ports: per direction d (0 N, 1 E, 2 S, 3 W) the incoming
// flit and credit go to the router, the outgoing ones leave through the
// direction's PHY model.
// The list of units, the per-lane RFs, the router and the PHYs follow the
// paper. The micro-operation set, the one-operation-at-a-time sequencer and
// the push-style remote write are this design's own choices: the paper
// evaluates scheduling in a simulator and describes no control hardware.
// Lint may report rst_n as used both synchronously and asynchronously: the
// synchronous use is the `disable iff` of the router and BConvU assertions.
module core
  import cifher_pkg::*;
#(
  parameter int unsigned P         = 16,
  parameter int unsigned S         = 4,
  parameter int unsigned K         = 12,
  parameter int unsigned LM        = 48,
  parameter int unsigned SP_DEPTH  = 65536,  // scratchpad rows (16 MB per core at 64 lanes)
  parameter int unsigned AUX_DEPTH = 4096,   // auxiliary rows (1 MB per core at 64 lanes)
  parameter int unsigned PHY_LAT   = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [COORD_W-1:0]  my_x,
  input  logic [COORD_W-1:0]  my_y,
  // micro-operation port
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  cmd_t                cmd,
  output logic                idle,
  // NoP links, index 0..3 = N, E, S, W
  input  logic                l_in_valid  [4],
  input  logic [VC_W-1:0]     l_in_vc     [4],
  input  flit_hdr_t           l_in_hdr    [4],
  input  word_t               l_in_data   [4][S*P],
  output logic                l_cr_out_valid [4],
  output logic [VC_W-1:0]     l_cr_out_vc    [4],
  output logic                l_out_valid [4],
  output logic [VC_W-1:0]     l_out_vc    [4],
  output flit_hdr_t           l_out_hdr   [4],
  output word_t               l_out_data  [4][S*P],
  input  logic                l_cr_in_valid [4],
  input  logic [VC_W-1:0]     l_cr_in_vc    [4]
);
  localparam int unsigned LANES = S * P;
  localparam int unsigned N     = (P*P) * (P*P);
  localparam int unsigned NROWS = N / LANES;
  localparam int unsigned SPA   = $clog2(SP_DEPTH);
  localparam int unsigned AXA   = $clog2(AUX_DEPTH);
  localparam int unsigned KW    = $clog2(K);
  localparam int unsigned IW    = $clog2(LM);
  localparam int unsigned RDEP  = 4;                  // router VC depth
  localparam int unsigned CRW   = $clog2(RDEP + 1);
  localparam int unsigned NPR   = 64;

  typedef logic [ADDR_W-1:0] addr_t;

  // ---------------- register files ----------------
  logic [SPA-1:0] sp_raddr [3];
  word_t          sp_rdata [3][LANES];
  logic           sp_we    [3];
  logic [SPA-1:0] sp_waddr [3];
  word_t          sp_wdata [3][LANES];
  logic [AXA-1:0] ax_raddr [3];
  word_t          ax_rdata [3][LANES];
  logic           ax_we    [3];
  logic [AXA-1:0] ax_waddr [3];
  word_t          ax_wdata [3][LANES];

  regfile #(.LANES(LANES), .DEPTH(SP_DEPTH),  .NR(3), .NW(3)) u_sprf (
    .clk, .raddr(sp_raddr), .rdata(sp_rdata), .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata));
  regfile #(.LANES(LANES), .DEPTH(AUX_DEPTH), .NR(3), .NW(3)) u_auxrf (
    .clk, .raddr(ax_raddr), .rdata(ax_rdata), .we(ax_we), .waddr(ax_waddr), .wdata(ax_wdata));

  // logical ports: 3 reads, write 0 = unit results, write 1 = NoP receive
  addr_t rd_addr [3];
  logic  rd_aux_q [3];
  word_t rd_data [3][LANES];
  logic  wr_en   [2];
  addr_t wr_addr [2];
  word_t wr_data [2][LANES];

  always_comb begin
    for (int r = 0; r < 3; r++) begin
      sp_raddr[r] = rd_addr[r][SPA-1:0];
      ax_raddr[r] = rd_addr[r][AXA-1:0];
      rd_data[r]  = rd_aux_q[r] ? ax_rdata[r] : sp_rdata[r];
    end
    for (int w = 0; w < 3; w++) begin
      sp_we[w] = 1'b0; sp_waddr[w] = '0; sp_wdata[w] = wr_data[0];
      ax_we[w] = 1'b0; ax_waddr[w] = '0; ax_wdata[w] = wr_data[0];
    end
    for (int w = 0; w < 2; w++) begin
      sp_we[w]    = wr_en[w] && !wr_addr[w][ADDR_W-1];
      ax_we[w]    = wr_en[w] &&  wr_addr[w][ADDR_W-1];
      sp_waddr[w] = wr_addr[w][SPA-1:0];
      ax_waddr[w] = wr_addr[w][AXA-1:0];
      sp_wdata[w] = wr_data[w];
      ax_wdata[w] = wr_data[w];
    end
  end
  always_ff @(posedge clk) for (int r = 0; r < 3; r++) rd_aux_q[r] <= rd_addr[r][ADDR_W-1];

  // ---------------- prime table ----------------
  prime_t ptab [NPR];
  prime_t pc;                        // prime of the current operation
  cmd_t   cur;

  // ---------------- functional units ----------------
  // EFU
  logic  efu_iv, efu_ov;
  word_t efu_y [LANES];
  efu #(.LANES(LANES)) u_efu (
    .clk, .rst_n, .in_valid(efu_iv), .op(efu_op_e'(cur.sel)), .q(pc.q), .qinv(pc.qinv),
    .a(rd_data[0]), .b(rd_data[1]), .c(rd_data[2]), .out_valid(efu_ov), .y(efu_y));

  // PRNG
  logic  prng_seed, prng_gen, prng_ov;
  word_t prng_y [LANES];
  prng #(.LANES(LANES)) u_prng (
    .clk, .rst_n, .seed_load(prng_seed), .seed(cur.imm), .q(pc.q), .qinv(pc.qinv), .r2(pc.r2),
    .gen(prng_gen), .out_valid(prng_ov), .y(prng_y));

  // NTTU
  logic  ntt_cfg, ntt_iv, ntt_ir, ntt_ov, ntt_busy;
  word_t ntt_y [LANES];
  nttu #(.P(P), .S(S)) u_nttu (
    .clk, .rst_n, .cfg_valid(ntt_cfg), .cfg_q(pc.q), .cfg_qinv(pc.qinv), .cfg_r2(pc.r2),
    .cfg_root(pc.root), .mode(cur.op == OP_INTT), .in_valid(ntt_iv), .in_ready(ntt_ir),
    .in_data(rd_data[0]), .out_valid(ntt_ov), .out_data(ntt_y), .busy(ntt_busy));

  // AutoU
  logic  au_iv, au_ir, au_ov, au_busy;
  word_t au_y [LANES];
  autou #(.P(P), .S(S)) u_autou (
    .clk, .rst_n, .galois(cur.imm), .in_valid(au_iv), .in_ready(au_ir), .in_data(rd_data[0]),
    .out_valid(au_ov), .out_data(au_y), .busy(au_busy));

  // BConvU
  logic          bc_tbl_we, bc_iv, bc_first, bc_last, bc_ov;
  logic [IW-1:0] bc_idx;
  logic [KW-1:0] bc_oj;
  word_t         bc_y [LANES];
  word_t         bc_p [K];
  word_t         bc_pinv [K];
  always_comb for (int j = 0; j < int'(K); j++) begin
    bc_p[j]    = ptab[(int'(cur.prime) + j) % NPR].q;
    bc_pinv[j] = ptab[(int'(cur.prime) + j) % NPR].qinv;
  end
  bconvu #(.LANES(LANES), .K(K), .LM(LM)) u_bconvu (
    .clk, .rst_n, .tbl_we(bc_tbl_we), .tbl_j(KW'(cmd.src0)), .tbl_i(IW'(cmd.src1)),
    .tbl_data(cmd.imm), .p(bc_p), .pinv(bc_pinv), .in_valid(bc_iv), .in_first(bc_first),
    .in_last(bc_last), .in_idx(bc_idx), .in_data(rd_data[0]), .out_valid(bc_ov), .out_j(bc_oj),
    .out_data(bc_y));

  // ---------------- router and PHYs ----------------
  logic            r_in_valid [5];
  logic [VC_W-1:0] r_in_vc    [5];
  flit_hdr_t       r_in_hdr   [5];
  word_t           r_in_data  [5][LANES];
  logic            r_cro_v    [5];
  logic [VC_W-1:0] r_cro_vc   [5];
  logic            r_out_valid[5];
  logic [VC_W-1:0] r_out_vc   [5];
  flit_hdr_t       r_out_hdr  [5];
  word_t           r_out_data [5][LANES];
  logic            r_cri_v    [5];
  logic [VC_W-1:0] r_cri_vc   [5];

  router #(.FW(LANES), .DEPTH(RDEP)) u_router (
    .clk, .rst_n, .my_x, .my_y,
    .in_valid(r_in_valid), .in_vc(r_in_vc), .in_hdr(r_in_hdr), .in_data(r_in_data),
    .cr_out_valid(r_cro_v), .cr_out_vc(r_cro_vc),
    .out_valid(r_out_valid), .out_vc(r_out_vc), .out_hdr(r_out_hdr), .out_data(r_out_data),
    .cr_in_valid(r_cri_v), .cr_in_vc(r_cri_vc));

  for (genvar d = 0; d < 4; d++) begin : g_dir
    assign r_in_valid[d+1] = l_in_valid[d];
    assign r_in_vc[d+1]    = l_in_vc[d];
    assign r_in_hdr[d+1]   = l_in_hdr[d];
    assign r_in_data[d+1]  = l_in_data[d];
    assign r_cri_v[d+1]    = l_cr_in_valid[d];
    assign r_cri_vc[d+1]   = l_cr_in_vc[d];
    nop_phy #(.FW(LANES), .LAT(PHY_LAT)) u_phy (
      .clk, .rst_n,
      .f_in_valid(r_out_valid[d+1]), .f_in_vc(r_out_vc[d+1]), .f_in_hdr(r_out_hdr[d+1]),
      .f_in_data(r_out_data[d+1]),
      .f_out_valid(l_out_valid[d]), .f_out_vc(l_out_vc[d]), .f_out_hdr(l_out_hdr[d]),
      .f_out_data(l_out_data[d]),
      .c_in_valid(r_cro_v[d+1]), .c_in_vc(r_cro_vc[d+1]),
      .c_out_valid(l_cr_out_valid[d]), .c_out_vc(l_cr_out_vc[d]));
  end

  // Local ejection: write into the RF, return the credit at once.
  assign wr_en[1]   = r_out_valid[P_LOCAL];
  assign wr_addr[1] = r_out_hdr[P_LOCAL].addr;
  assign wr_data[1] = r_out_data[P_LOCAL];
  assign r_cri_v[P_LOCAL]  = r_out_valid[P_LOCAL];
  assign r_cri_vc[P_LOCAL] = r_out_vc[P_LOCAL];

  // Local injection (SEND), with credits for the router's local input.
  logic [CRW-1:0]  lcred [NVC];
  logic            snd_go, snd_q;
  logic [VC_W-1:0] snd_vc, snd_vc_q;
  flit_hdr_t       snd_hdr_q;
  assign r_in_valid[P_LOCAL] = snd_q;
  assign r_in_vc[P_LOCAL]    = snd_vc_q;
  assign r_in_hdr[P_LOCAL]   = snd_hdr_q;
  assign r_in_data[P_LOCAL]  = rd_data[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < int'(NVC); v++) lcred[v] <= CRW'(RDEP);
    end else begin
      for (int v = 0; v < int'(NVC); v++)
        lcred[v] <= lcred[v] - ((snd_go && snd_vc == VC_W'(v)) ? 1'b1 : 1'b0)
                             + ((r_cro_v[P_LOCAL] && r_cro_vc[P_LOCAL] == VC_W'(v)) ? 1'b1 : 1'b0);
    end
  end

  // ---------------- sequencer ----------------
  typedef enum logic [2:0] {ST_IDLE, ST_CFG, ST_ISSUE, ST_DRAIN} state_e;
  state_e       st;
  addr_t        icnt, ocnt, nout;      // issued rows, written rows, rows to write
  addr_t        bc_r, bc_i, bc_gap;    // BConv: row, limb, cycles in this group
  addr_t        bc_src;                // BConv: address of (limb i, row r)
  addr_t        bc_or;                 // BConv: output row
  addr_t        bc_grp;                // BConv: cycles per row group, max(ell, K)
  assign bc_grp = (addr_t'(cur.imm) > addr_t'(K)) ? addr_t'(cur.imm) : addr_t'(K);
  logic [5:0]   ntt_prime;
  logic         ntt_prime_vld;
  logic         iss_v;                 // row read issued last cycle
  logic         iss_first, iss_last;
  logic [IW-1:0] iss_idx;

  assign cmd_ready = (st == ST_IDLE);
  assign idle      = (st == ST_IDLE);
  assign snd_vc    = VC_W'(icnt);

  // read addresses for this cycle
  logic issue;
  always_comb begin
    issue  = 1'b0;
    snd_go = 1'b0;
    rd_addr[0] = cur.src0 + icnt;
    rd_addr[1] = cur.src1 + icnt;
    rd_addr[2] = cur.src2 + icnt;
    if (st == ST_ISSUE) begin
      unique case (cur.op)
        OP_EFU:   issue = (icnt < cur.len);
        OP_NTT, OP_INTT: issue = (icnt < addr_t'(NROWS)) && ntt_ir;
        OP_AUTO:  issue = (icnt < addr_t'(NROWS)) && au_ir;
        OP_BCONV: begin
          issue = (bc_r < cur.len) && (bc_i < addr_t'(cur.imm));
          rd_addr[0] = bc_src;
        end
        OP_SEND: begin
          issue  = (icnt < cur.len) && (lcred[snd_vc] != '0);
          snd_go = issue;
        end
        default: issue = 1'b0;
      endcase
    end
  end

  assign efu_iv   = iss_v && cur.op == OP_EFU;
  assign ntt_iv   = iss_v && (cur.op == OP_NTT || cur.op == OP_INTT);
  assign au_iv    = iss_v && cur.op == OP_AUTO;
  assign bc_iv    = iss_v && cur.op == OP_BCONV;
  assign bc_first = iss_first;
  assign bc_last  = iss_last;
  assign bc_idx   = iss_idx;
  assign prng_gen  = (st == ST_ISSUE) && cur.op == OP_PRNG && (icnt < cur.len);
  assign prng_seed = (st == ST_CFG) && cur.op == OP_PRNG;
  assign ntt_cfg   = (st == ST_CFG) && (cur.op == OP_NTT || cur.op == OP_INTT) &&
                     !(ntt_prime_vld && ntt_prime == cur.prime);
  assign bc_tbl_we = cmd_valid && cmd_ready && cmd.op == OP_CFG_BTBL;

  // unit results -> write port 0
  always_comb begin
    wr_en[0] = 1'b0; wr_addr[0] = cur.dst + ocnt; wr_data[0] = efu_y;
    unique case (cur.op)
      OP_EFU:          begin wr_en[0] = efu_ov;  wr_data[0] = efu_y;  end
      OP_PRNG:         begin wr_en[0] = prng_ov; wr_data[0] = prng_y; end
      OP_NTT, OP_INTT: begin wr_en[0] = ntt_ov;  wr_data[0] = ntt_y;  end
      OP_AUTO:         begin wr_en[0] = au_ov;   wr_data[0] = au_y;   end
      OP_BCONV: begin
        wr_en[0]   = bc_ov;
        wr_data[0] = bc_y;
        wr_addr[0] = cur.dst + addr_t'(bc_oj) * cur.len + bc_or;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE; cur <= '0; pc <= '0; icnt <= '0; ocnt <= '0; nout <= '0;
      bc_r <= '0; bc_i <= '0; bc_gap <= '0; bc_src <= '0; bc_or <= '0;
      ntt_prime <= '0; ntt_prime_vld <= 1'b0; iss_v <= 1'b0;
      iss_first <= 1'b0; iss_last <= 1'b0; iss_idx <= '0;
      snd_q <= 1'b0; snd_vc_q <= '0; snd_hdr_q <= '0;
      for (int i = 0; i < int'(NPR); i++) ptab[i] <= '{q: 32'd1, qinv: 32'hFFFF_FFFF, r2: 32'd0, root: 32'd0};
    end else begin
      iss_v <= issue && cur.op != OP_SEND;
      snd_q <= snd_go;
      if (snd_go) begin
        snd_vc_q  <= snd_vc;
        snd_hdr_q <= '{dx: cur.dx, dy: cur.dy, addr: cur.dst + icnt};
      end
      if (issue) begin
        iss_first <= (bc_i == '0);
        iss_last  <= (bc_i == addr_t'(cur.imm) - 1'b1);
        iss_idx   <= IW'(bc_i);
      end
      if (wr_en[0]) begin
        ocnt <= ocnt + 1'b1;
        if (cur.op == OP_BCONV && bc_oj == KW'(K - 1)) bc_or <= bc_or + 1'b1;
      end
      unique case (st)
        ST_IDLE: if (cmd_valid) begin
          cur <= cmd; pc <= ptab[cmd.prime];
          icnt <= '0; ocnt <= '0; bc_r <= '0; bc_i <= '0; bc_gap <= '0; bc_or <= '0;
          bc_src <= cmd.src0;
          unique case (cmd.op)
            OP_CFG_PRIME: unique case (cmd.sel[1:0])
              2'(PF_Q):    ptab[cmd.prime].q    <= cmd.imm;
              2'(PF_QINV): ptab[cmd.prime].qinv <= cmd.imm;
              2'(PF_R2):   ptab[cmd.prime].r2   <= cmd.imm;
              default:     ptab[cmd.prime].root <= cmd.imm;
            endcase
            OP_CFG_BTBL, OP_NOP: ;
            OP_EFU, OP_SEND: begin nout <= cmd.len; st <= ST_ISSUE; end
            OP_PRNG:  begin nout <= cmd.len; st <= ST_CFG; end
            OP_BCONV: begin nout <= addr_t'(cmd.len * K); st <= ST_ISSUE; end
            OP_NTT, OP_INTT: begin nout <= addr_t'(NROWS); st <= ST_CFG; end
            OP_AUTO:  begin nout <= addr_t'(NROWS); st <= ST_ISSUE; end
            default: ;
          endcase
          if (cmd.op == OP_CFG_PRIME && cmd.prime == ntt_prime) ntt_prime_vld <= 1'b0;
        end
        ST_CFG: begin
          if (cur.op == OP_PRNG) st <= ST_ISSUE;
          else if (ntt_cfg) begin
            ntt_prime <= cur.prime; ntt_prime_vld <= 1'b1;
          end else if (!ntt_busy) st <= ST_ISSUE;
        end
        ST_ISSUE: begin
          if (cur.op == OP_BCONV) begin
            if (bc_r < cur.len) begin
              if (issue) begin bc_i <= bc_i + 1'b1; bc_src <= bc_src + cur.len; end
              bc_gap <= bc_gap + 1'b1;
              if (bc_gap + 1'b1 >= bc_grp) begin
                bc_r <= bc_r + 1'b1; bc_i <= '0; bc_gap <= '0; bc_src <= cur.src0 + bc_r + 1'b1;
              end
            end
          end else if (issue || prng_gen) icnt <= icnt + 1'b1;
          if (cur.op == OP_SEND) begin
            if (icnt == cur.len) st <= ST_DRAIN;
          end else if (ocnt + (wr_en[0] ? 1'b1 : 1'b0) >= nout) st <= ST_IDLE;
        end
        ST_DRAIN: st <= ST_IDLE;
        default: st <= ST_IDLE;
      endcase
    end
  end
endmodule
