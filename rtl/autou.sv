// autou: automorphism unit. It applies phi: coefficient i -> position
// (i * k) mod N to one limb, where k = 5^r mod N is the Galois element of a
// rotation by r (k must be odd so phi is a permutation).
//
// The limb streams in and out in the NTTU row layout (cifher_pkg::
// layout_idx), N/LANES rows of LANES words. During the fill phase every
// word is written to its permuted position in an N-word buffer; once the
// limb is complete, the drain phase reads the buffer back row by row in
// the same layout. A new limb is accepted after the drain has started
// reading (in_ready). Output has no back-pressure; first output row comes
// two cycles after the last input row.
// Follows the paper's definition of the automorphism (a pure index map).
// The buffer-based crossbar is this design's choice: the paper takes the
// unit's structure from prior work without describing it, and a limb split
// over several cores (which needs NoP traffic) is not handled here.
module autou
  import cifher_pkg::*;
#(
  parameter int unsigned P = 16,
  parameter int unsigned S = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t galois,             // k, sampled with the first row
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data  [S*P],
  output logic  out_valid,
  output word_t out_data [S*P],
  output logic  busy
);
  localparam int unsigned LANES = S * P;
  localparam int unsigned N     = (P*P) * (P*P);
  localparam int unsigned NROWS = N / LANES;
  localparam int unsigned RW    = $clog2(NROWS) + 1;

  word_t         buffer [N];
  word_t         k_r;
  logic [RW-1:0] in_cnt, rd_cnt;
  logic          drain;

  word_t k_eff;
  assign k_eff    = (in_cnt == '0) ? galois : k_r;
  assign in_ready = !drain;
  wire   in_fire  = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (in_fire)
      for (int l = 0; l < int'(LANES); l++)
        buffer[(64'(layout_idx(int'(in_cnt), l, P, S)) * 64'(k_eff)) % N] <= in_data[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cnt <= '0; rd_cnt <= '0; drain <= 1'b0; k_r <= 32'd1; out_valid <= 1'b0;
    end else begin
      out_valid <= drain;
      if (in_fire) begin
        if (in_cnt == '0) k_r <= galois;
        in_cnt <= in_cnt + 1'b1;
        if (in_cnt == RW'(NROWS - 1)) begin
          drain  <= 1'b1;
          rd_cnt <= '0;
          in_cnt <= '0;
        end
      end
      if (drain) begin
        rd_cnt <= rd_cnt + 1'b1;
        if (rd_cnt == RW'(NROWS - 1)) drain <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < int'(LANES); l++)
      out_data[l] <= buffer[layout_idx(int'(rd_cnt), l, P, S)];
  end

  assign busy = drain || out_valid || (in_cnt != '0);
endmodule
