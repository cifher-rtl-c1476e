// tb_router: one router at (1,1) with FW = 2, DEPTH = 4. Five traffic
// sources (one per input port) send random single-flit packets on random
// VCs to random destinations in a 3x3 neighbourhood, obeying the credits
// the router returns. Five sinks accept flits and return credits after a
// random delay, so outputs are back-pressured. Checks: every flit leaves
// on its XY output port with its VC, header and payload intact; flits from
// one input VC to one output stay in order; no sink ever holds more than
// DEPTH un-credited flits per VC; nothing is lost; an uncontended flit
// is on the output port two cycles after the source drives it (FIFO write
// plus output register).
module tb_router;
  import cifher_pkg::*;
  localparam int FW = 2, DEPTH = 4, NPKT = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [COORD_W-1:0] my_x = 1, my_y = 1;
  logic in_valid [5], cr_out_valid [5], out_valid [5], cr_in_valid [5];
  logic [VC_W-1:0] in_vc [5], cr_out_vc [5], out_vc [5], cr_in_vc [5];
  flit_hdr_t in_hdr [5], out_hdr [5];
  word_t in_data [5][FW], out_data [5][FW];
  router #(.FW(FW), .DEPTH(DEPTH)) dut (.*);

  int scred [5][NVC];        // source-side credits
  int held  [5][NVC];        // flits held by a sink, credit not yet returned
  int sent = 0, rcvd = 0;
  int seq [5][NVC];          // per source VC sequence numbers
  int last_seq [5][NVC][5];  // per (src, vc, out) last sequence seen
  int ncyc = 0;
  int probe = 0, probe_t = 0, probe_lat = -1;

  function automatic int exp_port(flit_hdr_t h);
    if (h.dx > 1) return P_EAST;
    if (h.dx < 1) return P_WEST;
    if (h.dy > 1) return P_SOUTH;
    if (h.dy < 1) return P_NORTH;
    return P_LOCAL;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // payload word 0 = {src, vc, seq}; word 1 = copy of header
  always @(negedge clk) if (rst_n) begin
    ncyc++;
    // credits coming back from the router to the sources
    for (int p = 0; p < 5; p++) if (cr_out_valid[p]) scred[p][cr_out_vc[p]]++;
    // sinks
    for (int o = 0; o < 5; o++) begin
      cr_in_valid[o] = 0;
      for (int v = 0; v < NVC; v++)
        if (held[o][v] > 0 && !cr_in_valid[o] && ($urandom % 3 == 0)) begin
          cr_in_valid[o] = 1; cr_in_vc[o] = VC_W'(v); held[o][v]--;
        end
      if (out_valid[o] && probe == 2) probe_lat = ncyc - probe_t;
      if (out_valid[o]) begin
        int src, v, sq;
        src = int'(out_data[o][0] >> 24); v = int'(out_data[o][0] >> 16) & 255;
        sq = int'(out_data[o][0] & 16'hFFFF);
        rcvd++;
        checks += 4;
        if (exp_port(out_hdr[o]) != o) failures++;
        if (int'(out_vc[o]) != v) failures++;
        if (out_data[o][1] !== word_t'(out_hdr[o])) failures++;
        if (sq <= last_seq[src][v][o]) failures++;
        last_seq[src][v][o] = sq;
        held[o][out_vc[o]]++;
        checks++;
        if (held[o][out_vc[o]] > DEPTH) failures++;
      end
    end
    // sources
    for (int p = 0; p < 5; p++) begin
      in_valid[p] = 0;
      if (probe == 1 && p == P_WEST) begin
        flit_hdr_t h;
        h.dx = 2; h.dy = 1; h.addr = 5;
        in_valid[p] = 1; in_vc[p] = 0; in_hdr[p] = h;
        in_data[p][0] = word_t'((p << 24) | seq[p][0]);
        in_data[p][1] = word_t'(h);
        seq[p][0]++; scred[p][0]--; probe = 2; probe_t = ncyc;
      end
      if (sent < NPKT && ($urandom % 2 == 0)) begin
        int v;
        flit_hdr_t h;
        v = $urandom % NVC;
        if (scred[p][v] > 0) begin
          h.dx = COORD_W'($urandom % 3); h.dy = COORD_W'($urandom % 3);
          h.addr = ADDR_W'($urandom);
          in_valid[p] = 1; in_vc[p] = VC_W'(v); in_hdr[p] = h;
          in_data[p][0] = word_t'((p << 24) | (v << 16) | seq[p][v]);
          in_data[p][1] = word_t'(h);
          seq[p][v]++; scred[p][v]--; sent++;
        end
      end
    end
  end

  int t0;
  initial begin
    for (int p = 0; p < 5; p++) begin
      in_valid[p] = 0; cr_in_valid[p] = 0;
      for (int v = 0; v < NVC; v++) begin
        scred[p][v] = DEPTH; held[p][v] = 0; seq[p][v] = 1;
        for (int o = 0; o < 5; o++) last_seq[p][v][o] = 0;
      end
    end
    repeat (2) @(posedge clk); rst_n <= 1;
    wait (sent == NPKT);
    repeat (200) @(negedge clk);
    // latency probe on an idle router: input register (FIFO write) plus
    // output register = 2 cycles from the source driving the flit to the
    // flit being on the output port
    probe = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (probe_lat != 2) begin failures++; $display("probe latency %0d", probe_lat); end
    rcvd--;
    checks++;
    if (rcvd != NPKT) begin failures++; $display("sent %0d received %0d", sent, rcvd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
