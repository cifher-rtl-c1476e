// bconvu: systolic base-conversion unit, an output-stationary chain of K
// multiply-accumulate (MAC) units per lane (1 x K, K = 12 by default).
//
// BConv's dominant part is a (K x ell) by (ell x N) matrix product: output
// limb j of coefficient n is sum_i T[j][i] * v[i][n] mod p_j. A row of
// residues v[i][*] enters MAC 0 of every lane and moves one MAC per cycle
// along the chain together with its limb index i; MAC j multiplies it by
// its table entry T[j][i] (Montgomery form) and accumulates mod p_j. The
// first row of a group (in_first) restarts the accumulators; when the last
// row (in_last) passes MAC j, MAC j's sum is final and is delivered on the
// output port with out_j = j, so the K output limbs of a group leave on K
// consecutive cycles, one word per lane per cycle.
// Rule (asserted): successive in_last rows are at least K cycles apart, so
// no two MACs finish in the same cycle. The table (K x LM entries, shared
// by all lanes) is written through tbl_we; p/pinv give the K output moduli.
// Latency: output j of a group appears j+2 cycles after its last input row.
// Follows the paper: output-stationary systolic MAC array, 1 x 12 per lane.
// This design's choices: the table storage, the in-band limb index and the
// staggered drain.
// Lint reports rst_n as used both synchronously and asynchronously: the
// synchronous use is the `disable iff` of the assertion below, not logic.
module bconvu
  import cifher_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned K     = 12,
  parameter int unsigned LM    = 48     // largest ell
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  tbl_we,
  input  logic [$clog2(K)-1:0]  tbl_j,
  input  logic [$clog2(LM)-1:0] tbl_i,
  input  word_t                 tbl_data,
  input  word_t                 p    [K],
  input  word_t                 pinv [K],
  input  logic                  in_valid,
  input  logic                  in_first,
  input  logic                  in_last,
  input  logic [$clog2(LM)-1:0] in_idx,
  input  word_t                 in_data [LANES],
  output logic                  out_valid,
  output logic [$clog2(K)-1:0]  out_j,
  output word_t                 out_data [LANES]
);
  localparam int unsigned IW = $clog2(LM);

  word_t tbl [K][LM];
  always_ff @(posedge clk) if (tbl_we) tbl[tbl_j][tbl_i] <= tbl_data;

  // Chain registers: stage j holds the row that MAC j works on this cycle.
  logic          sv    [K];
  logic          sfst  [K];
  logic          slst  [K];
  logic [IW-1:0] sidx  [K];
  word_t         sx    [K][LANES];
  word_t         acc   [K][LANES];
  word_t         nacc  [K][LANES];

  for (genvar j = 0; j < K; j++) begin : g_mac
    word_t coef;
    assign coef = tbl[j][sidx[j]];
    for (genvar l = 0; l < LANES; l++) begin : g_l
      word_t prod;
      mont_mul u_mul (.a(sx[j][l]), .b(coef), .q(p[j]), .qinv(pinv[j]), .r(prod));
      assign nacc[j][l] = sfst[j] ? prod : mod_add(acc[j][l], prod, p[j]);
      always_ff @(posedge clk) if (sv[j]) acc[j][l] <= nacc[j][l];
    end
    if (j == 0) begin : g_in
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sv[0] <= 1'b0;
        else        sv[0] <= in_valid;
      end
      always_ff @(posedge clk) begin
        sfst[0] <= in_first; slst[0] <= in_last; sidx[0] <= in_idx; sx[0] <= in_data;
      end
    end else begin : g_mid
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sv[j] <= 1'b0;
        else        sv[j] <= sv[j-1];
      end
      always_ff @(posedge clk) begin
        sfst[j] <= sfst[j-1]; slst[j] <= slst[j-1]; sidx[j] <= sidx[j-1]; sx[j] <= sx[j-1];
      end
    end
  end

  // Drain: the MAC that sees the last row of its group this cycle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_j     <= '0;
    end else begin
      out_valid <= 1'b0;
      for (int j = 0; j < int'(K); j++) begin
        if (sv[j] && slst[j]) begin
          out_valid <= 1'b1;
          out_j     <= ($clog2(K))'(j);
        end
      end
    end
  end
  always_ff @(posedge clk) begin
    for (int j = 0; j < int'(K); j++)
      if (sv[j] && slst[j]) out_data <= nacc[j];
  end

  // Successive group ends must be at least K cycles apart.
  int unsigned since_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) since_last <= K;
    else if (in_valid && in_last) since_last <= 1;
    else if (since_last < K) since_last <= since_last + 1;
  end
  a_spacing: assert property (@(posedge clk) disable iff (!rst_n)
                              (in_valid && in_last) |-> (since_last >= K))
    else $error("bconvu: group ends closer than K cycles");
endmodule
