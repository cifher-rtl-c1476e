// ntt_half: one half of a composable-NTTU submodule. It computes an R-point
// DFT (R = P*P, the sqrt(N)-point (i)NTT along one matrix direction) on P
// lanes in P cycles, using the four-step method inside the half:
//   1. P-point DFT across the lanes of each input vector  (ntt_spatial)
//   2. twist: lane k of the c-th vector times w^(c*k)      (P multipliers)
//   3. P x P transpose over P cycles                        (ntt_transpose)
//   4. P-point DFT across the lanes again                   (ntt_spatial)
// With w the R-th root and om = w^P:
//   input : vector c (c = 0..P-1), lane l carries x[c + P*l]
//   output: vector k1,             lane k2 carries X[k1 + P*k2],
//           X[k] = sum_b x[b] * w^(b*k) mod q.
// Input and output use the same (vector, lane) <-> index map, so halves can
// be chained. Sequences may follow each other back to back; mode selects the
// Cooley-Tukey (NTT) or Gentleman-Sande (iNTT) butterflies, and the inverse
// transform is obtained by supplying the powers of w^-1 on wpow.
// wpow[e] = w^e (e = 0..R-1) in Montgomery form. Latency: 2*log2(P) + 3
// cycles from the last input vector of a sequence to its first output.
// The butterfly columns and transpose follow the paper's submodule figure;
// the placement of the twist multipliers is this design's choice.
module ntt_half
  import cifher_pkg::*;
#(
  parameter int unsigned P = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  mode,
  input  word_t q,
  input  word_t qinv,
  input  word_t wpow [P*P],
  input  logic  in_valid,
  input  word_t in_data [P],
  output logic  out_valid,
  output word_t out_data [P]
);
  localparam int unsigned R  = P * P;
  localparam int unsigned CW = (P > 1) ? $clog2(P) : 1;

  word_t opow [P/2];
  always_comb for (int m = 0; m < int'(P/2); m++) opow[m] = wpow[P*m];

  // Step 1
  logic  a_valid;
  word_t a_data [P];
  ntt_spatial #(.P(P)) u_step1 (
    .clk, .rst_n, .mode, .q, .qinv, .opow,
    .in_valid, .in_data, .out_valid(a_valid), .out_data(a_data));

  // Step 2: twist
  logic [CW-1:0] c_cnt;
  logic          t_valid;
  word_t         t_data [P];
  word_t         tw     [P];
  word_t         tprod  [P];
  for (genvar k = 0; k < P; k++) begin : g_tw
    assign tw[k] = wpow[(int'(c_cnt) * k) % R];
    mont_mul u_mul (.a(a_data[k]), .b(tw[k]), .q(q), .qinv(qinv), .r(tprod[k]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_cnt   <= '0;
      t_valid <= 1'b0;
    end else begin
      t_valid <= a_valid;
      if (a_valid) c_cnt <= c_cnt + 1'b1;
    end
  end
  always_ff @(posedge clk) if (a_valid) t_data <= tprod;

  // Step 3
  logic  x_valid;
  word_t x_data [P];
  ntt_transpose #(.P(P)) u_trans (
    .clk, .rst_n, .in_valid(t_valid), .in_data(t_data),
    .out_valid(x_valid), .out_data(x_data));

  // Step 4
  ntt_spatial #(.P(P)) u_step4 (
    .clk, .rst_n, .mode, .q, .qinv, .opow,
    .in_valid(x_valid), .in_data(x_data), .out_valid, .out_data);
endmodule
