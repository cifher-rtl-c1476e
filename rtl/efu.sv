// efu: element-wise function unit, one modular datapath per lane.
//
// Each valid cycle it applies one operation to a row of LANES residues
// (operands a, b, c) mod q and delivers the row one cycle later:
//   ADD a+b, SUB a-b, MUL a*b, MULADD a*b+c, MULSUB c-a*b, NEG -a, MOV a.
// Multiplications are Montgomery products, so b is expected in Montgomery
// form (then the result is the ordinary product). MULADD/MULSUB are the
// compound operations the paper mentions for relieving the RFs (fused
// multiply-accumulate in one pass). Op set, operand order and the one-cycle
// latency are this design's choices; the paper names the unit and lists
// modular multipliers, adders and compound element-wise ops.
module efu
  import cifher_pkg::*;
#(
  parameter int unsigned LANES = 64
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  efu_op_e op,
  input  word_t   q,
  input  word_t   qinv,
  input  word_t   a [LANES],
  input  word_t   b [LANES],
  input  word_t   c [LANES],
  output logic    out_valid,
  output word_t   y [LANES]
);
  word_t prod [LANES];
  word_t res  [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    mont_mul u_mul (.a(a[l]), .b(b[l]), .q(q), .qinv(qinv), .r(prod[l]));
    always_comb begin
      unique case (op)
        EFU_ADD:    res[l] = mod_add(a[l], b[l], q);
        EFU_SUB:    res[l] = mod_sub(a[l], b[l], q);
        EFU_MUL:    res[l] = prod[l];
        EFU_MULADD: res[l] = mod_add(prod[l], c[l], q);
        EFU_MULSUB: res[l] = mod_sub(c[l], prod[l], q);
        EFU_NEG:    res[l] = mod_sub('0, a[l], q);
        default:    res[l] = a[l];
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk) if (in_valid) y <= res;
endmodule
