// cifher_pkg: constants, types and small modular-arithmetic helpers shared by
// the chiplet core and its functional units.
//
// All words are 32 bits. Residues live in Montgomery form (x*2^32 mod q)
// wherever they are multiplied; additions and subtractions are the same in
// either form. Moduli q must be odd and below 2^32; inputs are assumed
// already reduced (< q).
//
// Package default sizes follow the 16-core (4x4) default configuration:
// N = 2^16, 1,024 lanes in total, 64 lanes per core, K = 12 auxiliary primes.
package cifher_pkg;

  localparam int unsigned WORD = 32;
  typedef logic [WORD-1:0] word_t;

  // Degree of the polynomial ring and derived NTT sizes.
  localparam int unsigned LOG_N   = 16;
  localparam int unsigned N_DEF   = 1 << LOG_N;      // 65536
  // K = 12 auxiliary primes and up to L = 48 limbs are parameters of the
  // units that use them (bconvu K/LM, core, cifher_top).

  // Mesh and link geometry.
  localparam int unsigned COORD_W = 4;               // mesh rows 1..DY, I/O dies at rows 0 and DY+1
  localparam int unsigned NVC     = 4;               // virtual channels per port
  localparam int unsigned VC_W    = 2;
  localparam int unsigned ADDR_W  = 20;              // RF row address (MSB selects aux RF)

  // Router port numbering.
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0, P_NORTH = 3'd1, P_EAST = 3'd2, P_SOUTH = 3'd3, P_WEST = 3'd4
  } port_e;

  // Element-wise function unit operations.
  typedef enum logic [2:0] {
    EFU_ADD    = 3'd0,   // a + b
    EFU_SUB    = 3'd1,   // a - b
    EFU_MUL    = 3'd2,   // a * b  (Montgomery)
    EFU_MULADD = 3'd3,   // a * b + c
    EFU_MULSUB = 3'd4,   // c - a * b
    EFU_NEG    = 3'd5,   // -a
    EFU_MOV    = 3'd6    // a
  } efu_op_e;

  // Core micro-operations.
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_NTT      = 4'd1,   // forward NTT of one limb
    OP_INTT     = 4'd2,   // inverse NTT of one limb (unscaled)
    OP_EFU      = 4'd3,   // element-wise op over len rows
    OP_BCONV    = 4'd4,   // base conversion, ell input limbs -> K output limbs
    OP_AUTO     = 4'd5,   // automorphism of one limb
    OP_PRNG     = 4'd6,   // fill len rows with uniform residues
    OP_SEND     = 4'd7,   // send len rows to a remote core over the NoP
    OP_CFG_PRIME= 4'd8,   // write one field of the prime table
    OP_CFG_BTBL = 4'd9    // write one entry of the BConv table
  } op_e;

  // Prime-table fields written by OP_CFG_PRIME (selected by cmd.sel).
  typedef enum logic [1:0] {
    PF_Q = 2'd0, PF_QINV = 2'd1, PF_R2 = 2'd2, PF_ROOT = 2'd3
  } pfield_e;

  typedef struct packed {
    word_t q;      // modulus
    word_t qinv;   // -q^-1 mod 2^32
    word_t r2;     // 2^64 mod q
    word_t root;   // primitive N-th root of unity, Montgomery form
  } prime_t;

  // One micro-operation for a core.
  typedef struct packed {
    op_e                 op;
    logic [2:0]          sel;     // EFU op, prime-table field, or dest RF flag
    logic [5:0]          prime;   // prime-table index (first output prime for BConv)
    logic [ADDR_W-1:0]   src0;
    logic [ADDR_W-1:0]   src1;
    logic [ADDR_W-1:0]   src2;
    logic [ADDR_W-1:0]   dst;
    logic [ADDR_W-1:0]   len;     // rows (EFU, PRNG, SEND) or rows per limb (BConv)
    logic [COORD_W-1:0]  dx;      // SEND destination core
    logic [COORD_W-1:0]  dy;
    word_t               imm;     // ell (BConv), Galois element (AUTO), seed (PRNG), config data
  } cmd_t;

  // Flit header; a flit also carries one RF row of payload (see router).
  typedef struct packed {
    logic [COORD_W-1:0]  dx;
    logic [COORD_W-1:0]  dy;
    logic [ADDR_W-1:0]   addr;    // destination RF row
  } flit_hdr_t;

  // ---------------------------------------------------------------
  // Modular add / subtract on reduced inputs.
  function automatic word_t mod_add(word_t a, word_t b, word_t q);
    logic [WORD:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[WORD-1:0];
  endfunction

  function automatic word_t mod_sub(word_t a, word_t b, word_t q);
    logic [WORD:0] s;
    s = {1'b0, a} - {1'b0, b};
    if (a < b) s = s + {1'b0, q};
    return s[WORD-1:0];
  endfunction

  // Limb layout shared by the NTTU, the AutoU and the RFs. A limb of
  // N = (P*P)^2 coefficients occupies N/(S*P) rows of S*P lanes; row t, lane
  // (s*P + l) holds coefficient g + R*(c + P*l), with R = P*P, t = u*P + c and
  // g = S*u + s.
  function automatic int unsigned layout_idx(int unsigned t, int unsigned lane,
                                             int unsigned P, int unsigned S);
    int unsigned u, c, s, l;
    u = t / P; c = t % P; s = lane / P; l = lane % P;
    return (S*u + s) + P*P*(c + P*l);
  endfunction

  // Inverse of layout_idx: row and lane of coefficient n.
  function automatic int unsigned layout_row(int unsigned n, int unsigned P, int unsigned S);
    int unsigned g, b;
    g = n % (P*P); b = n / (P*P);
    return (g / S) * P + (b % P);
  endfunction

  function automatic int unsigned layout_lane(int unsigned n, int unsigned P, int unsigned S);
    int unsigned g, b;
    g = n % (P*P); b = n / (P*P);
    return (g % S) * P + (b / P);
  endfunction

endpackage
