// tb_cifher_top: end-to-end test of a small package: 2x2 cores, P = 4,
// S = 2 (8 lanes, two NTT submodules per core, N = 256, 32 rows per limb),
// K = 12, small RFs. The scenario and checks are
// in tb_top_body.svh (HBM loads through both I/O dies, NTT on one core,
// core-to-core transfer over the mesh, INTT on another core, AUTO, EFU and
// PRNG on a third core in parallel, stores to both I/O dies).
module tb_cifher_top;
  import tb_util_pkg::*;
  import cifher_pkg::*;
  localparam int DX = 2, DY = 2, P = 4, S = 2, K = 12;
  localparam int N = (P*P) * (P*P), LW = S * P, NROWS = N / LW;
  localparam int WATCHDOG = 200000;
  cifher_top #(.DX(DX), .DY(DY), .P(P), .S(S), .K(K), .SP_DEPTH(1024), .AUX_DEPTH(64)) dut (.*);
`include "tb_top_body.svh"
endmodule
