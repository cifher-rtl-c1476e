// router: 5x5 virtual-channel router of the network on package (NoP).
//
// Ports 0..4 are Local, North, East, South, West (cifher_pkg::port_e). Each
// input port has NVC = 4 virtual channels with a DEPTH-flit FIFO each. A
// flit carries a header (destination core x/y and destination RF row) and
// FW payload words; every flit is a complete packet. Routing is XY
// (dimension order: first along x, then along y; y grows southward), which
// is deadlock free on a mesh. A flit keeps its VC from source to
// destination.
// Flow control is credit based: the router holds one credit counter per
// output port and VC (initialised to DEPTH, the downstream FIFO depth),
// spends one per flit sent and regains one per credit returned on
// cr_in_*; it returns a credit upstream on cr_out_* whenever it removes a
// flit from an input FIFO. Credits make the protocol independent of link
// latency (PHY pipelines).
// Allocation is separable, input first: each input picks one VC whose head
// flit has a credit at its output (round robin), then each output picks one
// requesting input (round robin). Output registers: one cycle per hop plus
// the PHY latency.
// Follows the paper: 5x5 VC routers, 4 VCs per port, XY routing. This
// design's choices: single-flit packets, VC kept end to end, FIFO depth,
// credit flow control and the allocator.
// Lint reports rst_n as used both synchronously and asynchronously: the
// synchronous use is the `disable iff` of the assertion below, not logic.
module router
  import cifher_pkg::*;
#(
  parameter int unsigned FW    = 64,   // payload words per flit
  parameter int unsigned DEPTH = 4     // flits per VC FIFO
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [COORD_W-1:0]  my_x,
  input  logic [COORD_W-1:0]  my_y,
  // input side
  input  logic                in_valid   [5],
  input  logic [VC_W-1:0]     in_vc      [5],
  input  flit_hdr_t           in_hdr     [5],
  input  word_t               in_data    [5][FW],
  output logic                cr_out_valid [5],
  output logic [VC_W-1:0]     cr_out_vc    [5],
  // output side
  output logic                out_valid  [5],
  output logic [VC_W-1:0]     out_vc     [5],
  output flit_hdr_t           out_hdr    [5],
  output word_t               out_data   [5][FW],
  input  logic                cr_in_valid [5],
  input  logic [VC_W-1:0]     cr_in_vc    [5]
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  function automatic logic [2:0] xy_route(flit_hdr_t h, logic [COORD_W-1:0] x,
                                           logic [COORD_W-1:0] y);
    if (h.dx > x)      return 3'(P_EAST);
    else if (h.dx < x) return 3'(P_WEST);
    else if (h.dy > y) return 3'(P_SOUTH);
    else if (h.dy < y) return 3'(P_NORTH);
    else               return 3'(P_LOCAL);
  endfunction

  // ---------------- input FIFOs ----------------
  flit_hdr_t      fh   [5][NVC][DEPTH];
  word_t          fd   [5][NVC][DEPTH][FW];
  logic [PW-1:0]  wp   [5][NVC];
  logic [PW-1:0]  rp   [5][NVC];
  logic [CW-1:0]  cnt  [5][NVC];
  logic [CW-1:0]  cred [5][NVC];

  // ---------------- allocation ----------------
  logic            ireq   [5];
  logic [VC_W-1:0] ivc    [5];
  logic [2:0]      iout   [5];
  logic [VC_W-1:0] vc_rr  [5];
  logic [2:0]      out_rr [5];
  logic            gnt    [5];     // per input: granted this cycle
  logic [2:0]      osrc   [5];     // per output: granted input
  logic            ogo    [5];

  always_comb begin
    for (int p = 0; p < 5; p++) begin
      ireq[p] = 1'b0; ivc[p] = '0; iout[p] = '0;
      for (int k = 0; k < int'(NVC); k++) begin
        int unsigned v;
        logic [2:0]  o;
        v = (int'(vc_rr[p]) + k) % NVC;
        o = xy_route(fh[p][v][rp[p][v]], my_x, my_y);
        if (!ireq[p] && cnt[p][v] != '0 && cred[o][v] != '0) begin
          ireq[p] = 1'b1; ivc[p] = VC_W'(v); iout[p] = o;
        end
      end
    end
    for (int p = 0; p < 5; p++) gnt[p] = 1'b0;
    for (int o = 0; o < 5; o++) begin
      ogo[o] = 1'b0; osrc[o] = '0;
      for (int k = 0; k < 5; k++) begin
        int unsigned p;
        p = (int'(out_rr[o]) + k) % 5;
        if (!ogo[o] && ireq[p] && iout[p] == 3'(o)) begin
          ogo[o] = 1'b1; osrc[o] = 3'(p); gnt[p] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 5; p++) begin
        vc_rr[p] <= '0; out_rr[p] <= '0; out_valid[p] <= 1'b0; out_vc[p] <= '0;
        cr_out_valid[p] <= 1'b0; cr_out_vc[p] <= '0;
        for (int v = 0; v < int'(NVC); v++) begin
          wp[p][v] <= '0; rp[p][v] <= '0; cnt[p][v] <= '0; cred[p][v] <= CW'(DEPTH);
        end
      end
    end else begin
      for (int p = 0; p < 5; p++) begin
        // FIFO occupancy: push from the link, pop on grant
        for (int v = 0; v < int'(NVC); v++) begin
          logic push, pop;
          push = in_valid[p] && in_vc[p] == VC_W'(v);
          pop  = gnt[p] && ivc[p] == VC_W'(v);
          if (push) wp[p][v] <= wp[p][v] + 1'b1;
          if (pop)  rp[p][v] <= rp[p][v] + 1'b1;
          cnt[p][v] <= cnt[p][v] + (push ? CW'(1) : CW'(0)) - (pop ? CW'(1) : CW'(0));
        end
        cr_out_valid[p] <= gnt[p];
        cr_out_vc[p]    <= ivc[p];
        if (gnt[p]) vc_rr[p] <= ivc[p] + 1'b1;
      end
      for (int o = 0; o < 5; o++) begin
        out_valid[o] <= ogo[o];
        if (ogo[o]) begin
          out_vc[o]  <= ivc[osrc[o]];
          out_rr[o]  <= (osrc[o] == 3'd4) ? 3'd0 : osrc[o] + 3'd1;
        end
        for (int v = 0; v < int'(NVC); v++) begin
          logic spend, back;
          spend = ogo[o] && ivc[osrc[o]] == VC_W'(v);
          back  = cr_in_valid[o] && cr_in_vc[o] == VC_W'(v);
          cred[o][v] <= cred[o][v] - (spend ? CW'(1) : CW'(0)) + (back ? CW'(1) : CW'(0));
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < 5; p++)
      if (in_valid[p]) begin
        fh[p][in_vc[p]][wp[p][in_vc[p]]] <= in_hdr[p];
        fd[p][in_vc[p]][wp[p][in_vc[p]]] <= in_data[p];
      end
    for (int o = 0; o < 5; o++)
      if (ogo[o]) begin
        out_hdr[o]  <= fh[osrc[o]][ivc[osrc[o]]][rp[osrc[o]][ivc[osrc[o]]]];
        out_data[o] <= fd[osrc[o]][ivc[osrc[o]]][rp[osrc[o]][ivc[osrc[o]]]];
      end
  end

  // A flit may only arrive on a VC with free space (upstream credit rule).
  for (genvar p = 0; p < 5; p++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid[p] |-> (cnt[p][in_vc[p]] < CW'(DEPTH)))
      else $error("router: VC FIFO overflow on port %0d", p);
  end
endmodule
