// ntt_spatial: P-point DFT across P lanes, one vector per cycle, built from
// log2(P) pipelined columns of P/2 butterfly units (the butterfly columns of
// the NTTU submodule figure).
//
// mode = 0: Cooley-Tukey (decimation in time). The lanes are bit-reversed at
//   the input and the columns use half-spans 1, 2, ..., P/2.
// mode = 1: Gentleman-Sande (decimation in frequency). The columns use
//   half-spans P/2, ..., 1 and the lanes are bit-reversed at the output.
// Both compute Y[k] = sum_j X[j] * om^(j*k) mod q in natural lane order,
// where om is the root whose powers om^0..om^(P/2-1) arrive on opow (Montgomery
// form). Butterfly (blk, j) of a column with half-span h pairs lanes
// blk*2h + j and blk*2h + j + h with twiddle om^(j*P/(2h)).
// Latency: log2(P) cycles. mode, q, qinv and opow must be stable while data
// is in flight.
module ntt_spatial
  import cifher_pkg::*;
#(
  parameter int unsigned P = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  mode,
  input  word_t q,
  input  word_t qinv,
  input  word_t opow [P/2],
  input  logic  in_valid,
  input  word_t in_data [P],
  output logic  out_valid,
  output word_t out_data [P]
);
  localparam int unsigned LG = $clog2(P);

  function automatic int unsigned bitrev(int unsigned v);
    int unsigned r = 0;
    for (int i = 0; i < int'(LG); i++) if (v[i]) r |= 1 << (LG - 1 - i);
    return r;
  endfunction

  // Pair index helpers: first lane of butterfly b in a column of half-span h.
  function automatic int unsigned lane0(int unsigned b, int unsigned h);
    return (b / h) * 2 * h + (b % h);
  endfunction

  word_t stg0 [P];
  word_t stg  [LG][P];     // registered outputs of each column
  logic  vld  [LG];

  always_comb begin
    for (int l = 0; l < int'(P); l++)
      stg0[l] = mode ? in_data[l] : in_data[bitrev(l)];
  end

  for (genvar s = 0; s < LG; s++) begin : g_col
    localparam int unsigned HN = 1 << s;            // CT half-span
    localparam int unsigned HI = P >> (s + 1);      // GS half-span
    word_t cin [P];
    word_t bx  [P/2];
    word_t by  [P/2];
    word_t nxt [P];
    if (s == 0) begin : g_first
      assign cin = stg0;
    end else begin : g_next
      assign cin = stg[s-1];
    end
    for (genvar b = 0; b < P/2; b++) begin : g_bf
      localparam int unsigned I0N = (b / HN) * 2 * HN + (b % HN);
      localparam int unsigned TWN = (b % HN) * (P / (2 * HN));
      localparam int unsigned I0I = (b / HI) * 2 * HI + (b % HI);
      localparam int unsigned TWI = (b % HI) * (P / (2 * HI));
      word_t a, bb, w;
      assign a  = mode ? cin[I0I]      : cin[I0N];
      assign bb = mode ? cin[I0I + HI] : cin[I0N + HN];
      assign w  = mode ? opow[TWI]     : opow[TWN];
      butterfly_unit u_bf (.mode(mode), .a(a), .b(bb), .w(w), .q(q), .qinv(qinv),
                           .x(bx[b]), .y(by[b]));
    end
    always_comb begin
      for (int b = 0; b < int'(P/2); b++) begin
        if (mode) begin
          nxt[lane0(b, HI)]      = bx[b];
          nxt[lane0(b, HI) + HI] = by[b];
        end else begin
          nxt[lane0(b, HN)]      = bx[b];
          nxt[lane0(b, HN) + HN] = by[b];
        end
      end
    end
    always_ff @(posedge clk) stg[s] <= nxt;
    logic vin;
    if (s == 0) begin : g_v0
      assign vin = in_valid;
    end else begin : g_vn
      assign vin = vld[s-1];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[s] <= 1'b0;
      else        vld[s] <= vin;
    end
  end

  always_comb begin
    for (int l = 0; l < int'(P); l++)
      out_data[l] = mode ? stg[LG-1][bitrev(l)] : stg[LG-1][l];
    out_valid = vld[LG-1];
  end
endmodule
