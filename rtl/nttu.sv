// nttu: composable number-theoretic-transform unit of one core.
//
// An N-point cyclic NTT (or unscaled iNTT) of one limb, N = R*R and R = P*P,
// is computed by S submodules. Each submodule has a row half and a column
// half (ntt_half, P lanes each), so the unit is S*P lanes wide and throughput
// grows with S, which is the resizing knob of the core.
//   Row pass : the R sequences {x[a + R*b]}_b (a = 0..R-1) are DFT'd by the
//              row halves, sequence a going to submodule a mod S; each result
//              Y_a[kk] is twisted by W^(a*kk) and written to the limb buffer.
//   Col pass : for each kk the sequence {Y'_a[kk]}_a is read back transposed
//              and DFT'd by the column halves, giving X[kk + R*j].
// Stream layout (input and output alike): row t = u*P + c (u = 0..R/S-1,
// c = 0..P-1); lane s*P + l carries element g + R*(c + P*l) with
// g = S*u + s. The unit therefore reads and writes the same RF rows,
// N/(S*P) rows per limb in each direction.
//
// Twiddles: on cfg_valid the unit computes W^e for e = 0..N-1 with one
// multiplier (N cycles, busy high) from the prime's N-th root W; the iNTT
// uses W^-e = W^(N-e). The limb buffer holds one limb; a new limb is
// accepted as soon as the column pass has read the buffer. Input must not
// arrive during table generation (in_ready low). No output back-pressure.
//
// Follows the paper: submodules of sqrt4(N) lanes, row-then-column four-step
// NTT, twist between the passes, 1 to 16 submodules. This design's choice:
// the inter-submodule exchange (perfect shuffle and quadrant swap between
// buffers in the paper) is realised as a buffer with transposed addressing,
// and twiddles are generated per prime rather than stored.
module nttu
  import cifher_pkg::*;
#(
  parameter int unsigned P = 16,   // lanes per submodule, sqrt4(N)
  parameter int unsigned S = 4     // submodules (1..P)
) (
  input  logic  clk,
  input  logic  rst_n,
  // prime configuration
  input  logic  cfg_valid,
  input  word_t cfg_q,
  input  word_t cfg_qinv,
  input  word_t cfg_r2,
  input  word_t cfg_root,          // primitive N-th root, Montgomery form
  input  logic  mode,              // 0 NTT, 1 iNTT; sampled with the first row
  // limb stream
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data  [S*P],
  output logic  out_valid,
  output word_t out_data [S*P],
  output logic  busy
);
  localparam int unsigned R     = P * P;
  localparam int unsigned N     = R * R;
  localparam int unsigned LW    = S * P;
  localparam int unsigned NROWS = N / LW;
  localparam int unsigned LGN   = $clog2(N);
  localparam int unsigned RW    = $clog2(NROWS) + 1;

  // ---------------- twiddle table ----------------
  word_t           q, qinv, cur, one, nxt_pow;
  word_t           root_r;
  word_t           tbl [N];
  logic            gen;
  logic [LGN:0]    gidx;

  mont_mul u_one (.a(cfg_r2), .b(32'd1), .q(cfg_q), .qinv(cfg_qinv), .r(one));
  mont_mul u_pow (.a(cur), .b(root_r), .q(q), .qinv(qinv), .r(nxt_pow));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen <= 1'b0; gidx <= '0; q <= 32'd1; qinv <= '1; cur <= '0; root_r <= '0;
    end else if (cfg_valid) begin
      gen <= 1'b1; gidx <= '0; q <= cfg_q; qinv <= cfg_qinv; cur <= one; root_r <= cfg_root;
    end else if (gen) begin
      cur  <= nxt_pow;
      gidx <= gidx + 1'b1;
      if (gidx == (LGN+1)'(N - 1)) gen <= 1'b0;
    end
  end
  always_ff @(posedge clk) if (gen) tbl[gidx[LGN-1:0]] <= cur;

  // ---------------- pass control ----------------
  logic           row_mode, col_mode, col_phase;
  logic [RW-1:0]  in_cnt, wr_cnt, rd_cnt;
  logic           row_ov;
  word_t          row_od [S][P];
  logic           rd_vld;
  word_t          rd_data [LW];
  logic [RW:0]    pending;

  assign in_ready = !gen && !col_phase && (in_cnt < RW'(NROWS));
  wire in_fire    = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_mode <= 1'b0; col_mode <= 1'b0; col_phase <= 1'b0;
      in_cnt <= '0; wr_cnt <= '0; rd_cnt <= '0; rd_vld <= 1'b0; pending <= '0;
    end else begin
      pending <= pending + (in_fire ? 1'b1 : 1'b0) - (out_valid ? 1'b1 : 1'b0);
      if (in_fire) begin
        if (in_cnt == '0) row_mode <= mode;
        in_cnt <= in_cnt + 1'b1;
      end
      if (row_ov) begin
        wr_cnt <= wr_cnt + 1'b1;
        if (wr_cnt == RW'(NROWS - 1)) begin
          col_phase <= 1'b1;
          col_mode  <= row_mode;
          rd_cnt    <= '0;
        end
      end
      rd_vld <= col_phase;
      if (col_phase) begin
        rd_cnt <= rd_cnt + 1'b1;
        if (rd_cnt == RW'(NROWS - 1)) begin
          col_phase <= 1'b0;
          in_cnt    <= '0;
          wr_cnt    <= '0;
        end
      end
    end
  end

  assign busy = gen || (pending != '0);

  // The first row of a limb enters the row halves in the cycle the mode is
  // sampled, so the row halves see the incoming mode until it is latched.
  logic row_mode_eff;
  assign row_mode_eff = (in_cnt == '0) ? mode : row_mode;

  // Half twiddle tables: powers of w = W^R (or of w^-1).
  word_t wpow_row [R];
  word_t wpow_col [R];
  always_comb begin
    for (int e = 0; e < int'(R); e++) begin
      wpow_row[e] = row_mode_eff ? tbl[(N - R*e) % N] : tbl[R*e];
      wpow_col[e] = col_mode ? tbl[(N - R*e) % N] : tbl[R*e];
    end
  end

  // ---------------- submodules ----------------
  word_t lim_buf [N];
  logic  col_ov [S];
  logic  row_ovs [S];
  word_t col_od [S][P];

  for (genvar s = 0; s < S; s++) begin : g_sub
    word_t rin [P];
    word_t cin [P];
    for (genvar l = 0; l < P; l++) begin : g_l
      assign rin[l] = in_data[s*P + l];
      assign cin[l] = rd_data[s*P + l];
      assign out_data[s*P + l] = col_od[s][l];
    end
    ntt_half #(.P(P)) u_row (
      .clk, .rst_n, .mode(row_mode_eff), .q, .qinv, .wpow(wpow_row),
      .in_valid(in_fire), .in_data(rin), .out_valid(row_ovs[s]), .out_data(row_od[s]));
    ntt_half #(.P(P)) u_col (
      .clk, .rst_n, .mode(col_mode), .q, .qinv, .wpow(wpow_col),
      .in_valid(rd_vld), .in_data(cin), .out_valid(col_ov[s]), .out_data(col_od[s]));
  end
  assign row_ov    = row_ovs[0];
  assign out_valid = col_ov[0];

  // Row-pass write: twist by W^(a*kk) and store at kk*R + a.
  word_t tw_w   [LW];
  word_t tw_p   [LW];
  int unsigned wa  [LW];
  for (genvar s = 0; s < S; s++) begin : g_tw
    for (genvar k2 = 0; k2 < P; k2++) begin : g_k
      localparam int unsigned I = s*P + k2;
      int unsigned a, kk, e;
      always_comb begin
        a  = S * (int'(wr_cnt) / P) + s;
        kk = (int'(wr_cnt) % P) + P * k2;
        e  = (a * kk) % N;
        if (row_mode) e = (N - e) % N;
        wa[I] = kk * R + a;
      end
      assign tw_w[I] = tbl[e];
      mont_mul u_mul (.a(row_od[s][k2]), .b(tw_w[I]), .q(q), .qinv(qinv), .r(tw_p[I]));
    end
  end
  always_ff @(posedge clk) begin
    if (row_ov) for (int i = 0; i < int'(LW); i++) lim_buf[wa[i]] <= tw_p[i];
  end

  // Column-pass read: sequence kk = S*v + s, element a = c + P*l.
  always_ff @(posedge clk) begin
    for (int s = 0; s < int'(S); s++)
      for (int l = 0; l < int'(P); l++)
        rd_data[s*P + l] <= lim_buf[(S * (int'(rd_cnt) / P) + s) * R + (int'(rd_cnt) % P) + P * l];
  end
endmodule
