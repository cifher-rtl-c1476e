// cifher_top: a CiFHER package, DX x DY core chiplets in a 2D mesh.
//
// Core (x, y) has mesh coordinates (x, y+1): row 0 is the north I/O die and
// row DY+1 the south I/O die, each of which holds an HBM controller and
// attaches to the mesh edge through the north (south) port of every core in
// the first (last) row. A flit addressed to (x, 0) or (x, DY+1) leaves the
// mesh through that column's I/O-die port; flits entering from the I/O-die
// ports (HBM loads) are routed like any other and written into the RF row
// named in their header. Neighbouring cores are linked through their PHYs
// with credit-based flow control; unused west/east edge ports are tied off.
// Every core has its own micro-operation port (cmd_*) and an idle flag.
// Defaults are the paper's 16-core (4x4) configuration with 64 lanes per core
// (4 NTT submodules), 1,024 lanes in the package, N = 2^16, a 16 MB
// scratchpad RF and a 1 MB auxiliary RF per core (256 MB and 16 MB in total).
// The I/O dies and HBM are outside this RTL: their mesh links are ports.
// Reset is asynchronous, active low. Lint reports rst_n as used both
// synchronously and asynchronously: the synchronous use is only the
// `disable iff (!rst_n)` of the router and BConvU assertions, which are not
// logic, so the warning stands.
module cifher_top
  import cifher_pkg::*;
#(
  parameter int unsigned DX        = 4,
  parameter int unsigned DY        = 4,
  parameter int unsigned P         = 16,
  parameter int unsigned S         = 4,
  parameter int unsigned K         = 12,
  parameter int unsigned SP_DEPTH  = 65536,
  parameter int unsigned AUX_DEPTH = 4096
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid [DX*DY],
  output logic            cmd_ready [DX*DY],
  input  cmd_t            cmd       [DX*DY],
  output logic            idle      [DX*DY],
  // I/O-die links: index x = column; n = north die, s = south die
  input  logic            io_n_in_valid [DX],
  input  logic [VC_W-1:0] io_n_in_vc    [DX],
  input  flit_hdr_t       io_n_in_hdr   [DX],
  input  word_t           io_n_in_data  [DX][S*P],
  output logic            io_n_cr_out_valid [DX],
  output logic [VC_W-1:0] io_n_cr_out_vc    [DX],
  output logic            io_n_out_valid [DX],
  output logic [VC_W-1:0] io_n_out_vc    [DX],
  output flit_hdr_t       io_n_out_hdr   [DX],
  output word_t           io_n_out_data  [DX][S*P],
  input  logic            io_n_cr_in_valid [DX],
  input  logic [VC_W-1:0] io_n_cr_in_vc    [DX],
  input  logic            io_s_in_valid [DX],
  input  logic [VC_W-1:0] io_s_in_vc    [DX],
  input  flit_hdr_t       io_s_in_hdr   [DX],
  input  word_t           io_s_in_data  [DX][S*P],
  output logic            io_s_cr_out_valid [DX],
  output logic [VC_W-1:0] io_s_cr_out_vc    [DX],
  output logic            io_s_out_valid [DX],
  output logic [VC_W-1:0] io_s_out_vc    [DX],
  output flit_hdr_t       io_s_out_hdr   [DX],
  output word_t           io_s_out_data  [DX][S*P],
  input  logic            io_s_cr_in_valid [DX],
  input  logic [VC_W-1:0] io_s_cr_in_vc    [DX]
);
  localparam int unsigned NC = DX * DY;
  localparam int unsigned LANES = S * P;

  // Per core, per direction (0 N, 1 E, 2 S, 3 W)
  logic            fi_v  [NC][4];
  logic [VC_W-1:0] fi_vc [NC][4];
  flit_hdr_t       fi_h  [NC][4];
  word_t           fi_d  [NC][4][LANES];
  logic            co_v  [NC][4];
  logic [VC_W-1:0] co_vc [NC][4];
  logic            fo_v  [NC][4];
  logic [VC_W-1:0] fo_vc [NC][4];
  flit_hdr_t       fo_h  [NC][4];
  word_t           fo_d  [NC][4][LANES];
  logic            ci_v  [NC][4];
  logic [VC_W-1:0] ci_vc [NC][4];

  for (genvar y = 0; y < DY; y++) begin : g_y
    for (genvar x = 0; x < DX; x++) begin : g_x
      localparam int unsigned C = y * DX + x;
      core #(.P(P), .S(S), .K(K), .SP_DEPTH(SP_DEPTH), .AUX_DEPTH(AUX_DEPTH)) u_core (
        .clk, .rst_n, .my_x(COORD_W'(x)), .my_y(COORD_W'(y + 1)),
        .cmd_valid(cmd_valid[C]), .cmd_ready(cmd_ready[C]), .cmd(cmd[C]), .idle(idle[C]),
        .l_in_valid(fi_v[C]), .l_in_vc(fi_vc[C]), .l_in_hdr(fi_h[C]), .l_in_data(fi_d[C]),
        .l_cr_out_valid(co_v[C]), .l_cr_out_vc(co_vc[C]),
        .l_out_valid(fo_v[C]), .l_out_vc(fo_vc[C]), .l_out_hdr(fo_h[C]), .l_out_data(fo_d[C]),
        .l_cr_in_valid(ci_v[C]), .l_cr_in_vc(ci_vc[C]));

      // North side
      if (y == 0) begin : g_n_io
        assign fi_v[C][0]  = io_n_in_valid[x];
        assign fi_vc[C][0] = io_n_in_vc[x];
        assign fi_h[C][0]  = io_n_in_hdr[x];
        assign fi_d[C][0]  = io_n_in_data[x];
        assign ci_v[C][0]  = io_n_cr_in_valid[x];
        assign ci_vc[C][0] = io_n_cr_in_vc[x];
        assign io_n_out_valid[x]    = fo_v[C][0];
        assign io_n_out_vc[x]       = fo_vc[C][0];
        assign io_n_out_hdr[x]      = fo_h[C][0];
        assign io_n_out_data[x]     = fo_d[C][0];
        assign io_n_cr_out_valid[x] = co_v[C][0];
        assign io_n_cr_out_vc[x]    = co_vc[C][0];
      end else begin : g_n
        localparam int unsigned NB = C - DX;
        assign fi_v[C][0]  = fo_v[NB][2];
        assign fi_vc[C][0] = fo_vc[NB][2];
        assign fi_h[C][0]  = fo_h[NB][2];
        assign fi_d[C][0]  = fo_d[NB][2];
        assign ci_v[C][0]  = co_v[NB][2];
        assign ci_vc[C][0] = co_vc[NB][2];
      end
      // South side
      if (y == DY - 1) begin : g_s_io
        assign fi_v[C][2]  = io_s_in_valid[x];
        assign fi_vc[C][2] = io_s_in_vc[x];
        assign fi_h[C][2]  = io_s_in_hdr[x];
        assign fi_d[C][2]  = io_s_in_data[x];
        assign ci_v[C][2]  = io_s_cr_in_valid[x];
        assign ci_vc[C][2] = io_s_cr_in_vc[x];
        assign io_s_out_valid[x]    = fo_v[C][2];
        assign io_s_out_vc[x]       = fo_vc[C][2];
        assign io_s_out_hdr[x]      = fo_h[C][2];
        assign io_s_out_data[x]     = fo_d[C][2];
        assign io_s_cr_out_valid[x] = co_v[C][2];
        assign io_s_cr_out_vc[x]    = co_vc[C][2];
      end else begin : g_s
        localparam int unsigned NB = C + DX;
        assign fi_v[C][2]  = fo_v[NB][0];
        assign fi_vc[C][2] = fo_vc[NB][0];
        assign fi_h[C][2]  = fo_h[NB][0];
        assign fi_d[C][2]  = fo_d[NB][0];
        assign ci_v[C][2]  = co_v[NB][0];
        assign ci_vc[C][2] = co_vc[NB][0];
      end
      // East side
      if (x == DX - 1) begin : g_e_edge
        assign fi_v[C][1]  = 1'b0;
        assign fi_vc[C][1] = '0;
        assign fi_h[C][1]  = '0;
        assign fi_d[C][1]  = '{default: '0};
        assign ci_v[C][1]  = 1'b0;
        assign ci_vc[C][1] = '0;
      end else begin : g_e
        localparam int unsigned NB = C + 1;
        assign fi_v[C][1]  = fo_v[NB][3];
        assign fi_vc[C][1] = fo_vc[NB][3];
        assign fi_h[C][1]  = fo_h[NB][3];
        assign fi_d[C][1]  = fo_d[NB][3];
        assign ci_v[C][1]  = co_v[NB][3];
        assign ci_vc[C][1] = co_vc[NB][3];
      end
      // West side
      if (x == 0) begin : g_w_edge
        assign fi_v[C][3]  = 1'b0;
        assign fi_vc[C][3] = '0;
        assign fi_h[C][3]  = '0;
        assign fi_d[C][3]  = '{default: '0};
        assign ci_v[C][3]  = 1'b0;
        assign ci_vc[C][3] = '0;
      end else begin : g_w
        localparam int unsigned NB = C - 1;
        assign fi_v[C][3]  = fo_v[NB][1];
        assign fi_vc[C][3] = fo_vc[NB][1];
        assign fi_h[C][3]  = fo_h[NB][1];
        assign fi_d[C][3]  = fo_d[NB][1];
        assign ci_v[C][3]  = co_v[NB][1];
        assign ci_vc[C][3] = co_vc[NB][1];
      end
    end
  end
endmodule
