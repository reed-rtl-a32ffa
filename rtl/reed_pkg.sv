// reed_pkg: constants, types and modular arithmetic shared by the REED chiplet.
//
// Coefficients are W-bit residues modulo an RNS prime of the special form
// q = 2^(W-1) + qH*2^M + 1 with a qH of at most QH_BITS bits (W=54, M=18,
// QH_BITS=10 follow the paper). For such a prime q = 1 (mod 2^M), so the
// Montgomery constant -q^-1 mod 2^M is simply 2^M-1 and the product u*q needs
// only shifts, one small (M x QH_BITS) multiply and additions. mont_mul()
// performs W/M word-level Montgomery steps and returns a*b*2^-W mod q.
//
// Convention of this design (not stated in the paper): one operand of every
// multiplication (twiddle factor, switching key, scaling constant) is kept in
// Montgomery form x*2^W mod q, so that mont_mul(data, const) = data*x mod q and
// data stays in normal form everywhere.
//
// The instruction encoding used by the instruction controller and the PU is
// also defined here; it is this design's own (the paper lists the kinds of
// micro-instructions but not their encoding).
package reed_pkg;

  localparam int unsigned W       = 54;   // word size w
  localparam int unsigned M       = 18;   // Montgomery word (reduction) size m
  localparam int unsigned QH_BITS = 10;   // ceil(log2 qH)
  localparam int unsigned MSTEPS  = W / M;

  typedef logic [W-1:0] coeff_t;

  // Memory identifiers used by instructions (Fig. 9 has five memory units).
  typedef enum logic [2:0] {
    MEM_ACC0 = 3'd0,  // top-left memory, HBM read/write (accumulator c''0)
    MEM_IN   = 3'd1,  // middle-left memory, filled from HBM (NTT input)
    MEM_ACC1 = 3'd2,  // bottom-left memory, HBM read/write (accumulator c''1)
    MEM_KEY  = 3'd3,  // top-right memory, filled from HBM (ksk0)
    MEM_SM   = 3'd4,  // small memory shared with the C2C link (INTT results)
    SRC_PRNG = 3'd5,  // PRNG output (only as MAS operand b)
    SRC_ZERO = 3'd6   // constant zero operand
  } mem_id_e;

  typedef enum logic [3:0] {
    OP_HALT  = 4'd0,
    OP_NTT   = 4'd1,  // NTT/INTT of one limb (optionally fused with key multiply)
    OP_MAS   = 4'd2,  // point-wise multiply/add/sub/mac on one limb
    OP_AUT   = 4'd3,  // automorphism of one limb
    OP_SWAP  = 4'd4,  // swap ping-pong halves of selected memories
    OP_SEED  = 4'd5,  // (re)seed the PRNG
    OP_XFER  = 4'd6,  // start non-blocking ring transfer of the small memory
    OP_XWAIT = 4'd7   // wait until the ring transfer has completed
  } opcode_e;

  typedef enum logic [1:0] {
    MAS_ADD = 2'd0,   // a + c
    MAS_SUB = 2'd1,   // a - c
    MAS_MUL = 2'd2,   // a * b
    MAS_MAC = 2'd3    // a * b + c
  } mas_op_e;

  localparam int unsigned MODW    = 6;    // up to 64 RNS moduli

  typedef struct packed {
    logic [63:0]     imm;      // PRNG seed (OP_SEED) or Galois element (OP_AUT)
    logic [26:0]     rsvd;
    logic [4:0]      swap_mask;// OP_SWAP: bit per memory id 0..4
    logic            keymul;   // OP_NTT: feed result to both MAS units (ksk0 and PRNG ksk1)
    logic            inverse;  // OP_NTT: 1 = INTT
    logic            unit;     // OP_MAS/OP_AUT: 0 = top unit, 1 = bottom unit
    mas_op_e         mas_op;
    logic [MODW-1:0] mod_idx;  // RNS modulus index
    mem_id_e         dst;
    mem_id_e         src_c;
    mem_id_e         src_b;
    mem_id_e         src_a;
    opcode_e         opcode;
  } instr_t;

  // ---------------------------------------------------------------- arithmetic
  function automatic coeff_t mod_add(coeff_t a, coeff_t b, coeff_t q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[W-1:0];
  endfunction

  function automatic coeff_t mod_sub(coeff_t a, coeff_t b, coeff_t q);
    logic [W:0] s;
    s = {1'b0, a} - {1'b0, b};
    if (a < b) s = s + {1'b0, q};
    return s[W-1:0];
  endfunction

  // a*b*2^-W mod q for q = 2^(W-1) + qH*2^M + 1; a, b < q.
  function automatic coeff_t mont_mul(coeff_t a, coeff_t b, coeff_t q);
    logic [2*W:0]         t;
    logic [M-1:0]         u;
    logic [QH_BITS-1:0]   qh;
    logic [M+QH_BITS-1:0] uqh;
    logic [2*W:0]         uq;
    qh = q[M+QH_BITS-1:M];
    t  = {1'b0, a} * {{(W+1){1'b0}}, b};
    for (int s = 0; s < int'(MSTEPS); s++) begin
      u   = M'(0) - t[M-1:0];                 // u = -t * q^-1 mod 2^M, q^-1 = 1
      uqh = {{QH_BITS{1'b0}}, u} * {{M{1'b0}}, qh};
      // u*q = u*2^(W-1) + u*qH*2^M + u
      uq  = ((2*W+1)'(u) << (W-1)) + ((2*W+1)'(uqh) << M) + (2*W+1)'(u);
      t   = (t + uq) >> M;
    end
    if (t >= {{(W+1){1'b0}}, q}) t = t - {{(W+1){1'b0}}, q};
    return t[W-1:0];
  endfunction

  function automatic int unsigned bitrev(int unsigned x, int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < bits; i++) r = (r << 1) | ((x >> i) & 1);
    return r;
  endfunction

endpackage
