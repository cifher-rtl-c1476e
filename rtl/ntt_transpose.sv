// ntt_transpose: P x P transpose unit ("Trans" in the NTTU submodule).
//
// Rows arrive one per valid cycle (row c holds elements M[c][0..P-1]); after
// P rows the block is complete and is read out column by column, one per
// cycle: output cycle k carries M[0..P-1][k]. Two banks are used in
// ping-pong fashion so that the next block can be written while the previous
// one is read, giving full throughput with a latency of one cycle after the
// last row of a block. Input rows of a block need not be contiguous in time,
// but a new block must not complete within P cycles of the previous one
// (which holds when input is at most one row per cycle).
//
// The paper shows the unit only as a box in its NTTU figure; the ping-pong
// register implementation is this design's choice.
module ntt_transpose
  import cifher_pkg::*;
#(
  parameter int unsigned P = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t in_data  [P],
  output logic  out_valid,
  output word_t out_data [P]
);
  localparam int unsigned CW = (P > 1) ? $clog2(P) : 1;

  word_t          mem [2][P][P];
  logic [CW-1:0]  wrow, rcol;
  logic           wsel, rsel, rd_active;

  always_ff @(posedge clk) begin
    if (in_valid) mem[wsel][wrow] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wrow <= '0; wsel <= 1'b0; rsel <= 1'b0; rcol <= '0; rd_active <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= rd_active;
      if (rd_active) begin
        rcol <= rcol + 1'b1;
        if (rcol == CW'(P - 1)) rd_active <= 1'b0;
      end
      if (in_valid) begin
        wrow <= wrow + 1'b1;
        if (wrow == CW'(P - 1)) begin
          wsel      <= ~wsel;
          rsel      <= wsel;
          rd_active <= 1'b1;
          rcol      <= '0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < int'(P); l++) out_data[l] <= mem[rsel][l][rcol];
  end
endmodule
