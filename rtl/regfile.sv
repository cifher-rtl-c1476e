// regfile: lane-sliced register file (used for both the scratchpad RF and
// the auxiliary RF of a core).
//
// DEPTH rows of LANES words; lane l of every row is private to lane l,
// matching the paper's vector organisation where a lane's RF space is not
// reachable from other lanes. NR read ports and NW write ports each access
// one whole row per cycle. Reads are synchronous (data one cycle after the
// address); a write and a read of the same row in one cycle return the old
// data. If two write ports hit the same row in one cycle the higher-numbered
// port wins. The paper reaches 6 reads and 6 writes per lane per cycle over
// both RFs through bank interleaving; this model provides the ports
// directly, without modelling banks or bank conflicts.
module regfile
  import cifher_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned NR    = 3,
  parameter int unsigned NW    = 3
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] raddr [NR],
  output word_t                    rdata [NR][LANES],
  input  logic                     we    [NW],
  input  logic [$clog2(DEPTH)-1:0] waddr [NW],
  input  word_t                    wdata [NW][LANES]
);
  word_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(NR); r++) rdata[r] <= mem[raddr[r]];
    for (int w = 0; w < int'(NW); w++) if (we[w]) mem[waddr[w]] <= wdata[w];
  end
endmodule
