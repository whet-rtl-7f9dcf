// whet_pkg: types, constants and modular-arithmetic helpers shared by the
// WHET accelerator RTL.
//
// Words are 32 bits wide (the baseline moves from a 36-bit to a conventional
// 32-bit datapath and all RNS primes are below 2^31).  Modular reduction is
// done with Barrett reduction: every unit that reduces modulo a prime q also
// receives mu = floor(2^62 / q), which the host computes once per prime.
// The paper does not say how its modular units reduce; Barrett is this
// design's choice.  Opcode encodings are this design's own as well.
// mod_add and mod_sub take the whole modulus descriptor for a uniform call
// style but need only q, so lint reports the unused mu bits of that argument.
package whet_pkg;

  localparam int unsigned WORD_W  = 32;           // datapath word (paper: 32-bit words)
  localparam int unsigned MU_W    = 40;           // floor(2^62/q) fits 40 bits for q >= 2^22
  localparam int unsigned BARRETT_K = 62;

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [MU_W-1:0]   mu_t;

  // Modulus descriptor carried with every modular operation.
  typedef struct packed {
    word_t q;   // prime, q < 2^31
    mu_t   mu;  // floor(2^62 / q)
  } modulus_t;

  // Barrett reduction of x < 2^63 modulo q (2^22 <= q < 2^31).  The quotient
  // estimate is at most 3 below the true quotient, hence three corrections.
  function automatic word_t mod_reduce(input logic [63:0] x, input modulus_t m);
    logic [103:0] prod;
    logic [63:0] t;
    logic [63:0] r;
    prod = 104'(x) * 104'(m.mu);
    t    = 64'(prod >> BARRETT_K);
    r    = x - t * 64'(m.q);
    if (r >= 64'(m.q)) r = r - 64'(m.q);
    if (r >= 64'(m.q)) r = r - 64'(m.q);
    if (r >= 64'(m.q)) r = r - 64'(m.q);
    return word_t'(r);
  endfunction

  function automatic word_t mod_mul(input word_t a, input word_t b, input modulus_t m);
    return mod_reduce(64'(a) * 64'(b), m);
  endfunction

  function automatic word_t mod_add(input word_t a, input word_t b, input modulus_t m);
    logic [WORD_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, m.q}) s = s - {1'b0, m.q};
    return word_t'(s);
  endfunction

  function automatic word_t mod_sub(input word_t a, input word_t b, input modulus_t m);
    return (a >= b) ? (a - b) : (a + m.q - b);
  endfunction

  // a*b + c mod q, the operation of one modular multiply-add (MMAD) unit.
  function automatic word_t mod_mad(input word_t a, input word_t b, input word_t c,
                                    input modulus_t m);
    return mod_reduce(64'(a) * 64'(b) + 64'(c), m);
  endfunction

  // ---------------------------------------------------------------------
  // Element-wise engine (EWE) instructions.
  // ---------------------------------------------------------------------
  typedef enum logic [3:0] {
    EWE_NOP     = 4'd0,
    EWE_ADD     = 4'd1,  // r0 = x0 + x1
    EWE_SUB     = 4'd2,  // r0 = x0 - x1
    EWE_MUL     = 4'd3,  // r0 = x0 * x1
    EWE_MAD     = 4'd4,  // r0 = x0 * x1 + x2
    EWE_KEYMULT = 4'd5,  // (r1,r2) = (acc_a + d*evk0, acc_b + d*evk1), one of beta steps
    EWE_PMAC_KM = 4'd6,  // extension 1: fused PMult + HAdd + KeyMult
    EWE_CSUBC   = 4'd7   // extension 2: r0 = (C*x0 - x1) * C'
  } ewe_op_e;

  // Operand bundle presented to one lane's EWE each cycle.
  //   KEYMULT : d=x0, evk0=prng, evk1=x1, acc_a=km0, acc_b=km1
  //   PMAC_KM : p=cst, a=x0, a'=x1, b=x2, evk0=prng, evk1=x3, b'=km0
  //   CSUBC   : a=x0, a'=x1, C=c0, C'=c1
  typedef struct packed {
    word_t x0, x1, x2, x3;   // main scratchpad operands
    word_t km0, km1;         // KeyMult buffer operands
    word_t cst;              // constant scratchpad (decompressed plaintext) operand
    word_t prng;             // PRNG-generated evk[0][i] word
    word_t c0, c1;           // scalar constants from the instruction
  } ewe_in_t;

  typedef struct packed {
    word_t r0;               // result to the main scratchpad
    word_t r1, r2;           // results to the KeyMult buffer
  } ewe_out_t;

  // ---------------------------------------------------------------------
  // Plaintext compression rates supported by the constant scratchpad path.
  // ---------------------------------------------------------------------
  typedef enum logic [1:0] {
    COMPR_8X  = 2'd0,   // each HBM word feeds one 8-lane group
    COMPR_16X = 2'd1,   // each HBM word feeds two groups
    COMPR_32X = 2'd2    // each HBM word feeds all four groups of a channel
  } compr_e;

  // ---------------------------------------------------------------------
  // Lane memory port requests.  Addresses are word addresses within one
  // lane's slice; 16 bits cover the largest slice (main scratchpad, 16384).
  // ---------------------------------------------------------------------
  typedef logic [15:0] addr_t;

  typedef struct packed {
    logic  en;
    addr_t addr;
  } port_req_t;

  // Where a functional unit's limb stream is read from or written to.
  typedef enum logic [1:0] {
    LOC_MAIN  = 2'd0,
    LOC_KM    = 2'd1,
    LOC_BCONV = 2'd2
  } loc_e;

  // Main scratchpad ports (7: the paper's "can supply only 7" per lane).
  localparam int unsigned MP_EWE_W  = 0;   // EWE result r0
  localparam int unsigned MP_FU_W   = 1;   // NTTU / AutoU result
  localparam int unsigned MP_EWE_R0 = 2;   // EWE x0..x3 = ports 2..5
  localparam int unsigned MP_FU_R   = 6;   // NTTU / AutoU operand
  localparam int unsigned MAIN_PORTS = 7;
  // KeyMult buffer ports.
  localparam int unsigned KP_R1_W = 0, KP_R2_W = 1, KP_FU_W = 2;
  localparam int unsigned KP_R0 = 3, KP_R1 = 4, KP_FU_R = 5;
  localparam int unsigned KM_PORTS = 6;
  // BConv buffer ports.
  localparam int unsigned BP_NTT_W = 0, BP_BCV_W = 1, BP_NTT_R = 2, BP_X0 = 3, BP_X1 = 4;
  localparam int unsigned BC_PORTS = 5;

  // ---------------------------------------------------------------------
  // Cluster instructions (one slot per sequencer of the VLIW bundle).
  // ---------------------------------------------------------------------
  // EWE: element t (0..len-1) reads x_k at x_base[k]+t, km_k at km_base[k]+t,
  // the constant scratchpad at cst_base+t, writes r0 at wr_base+t and r1/r2
  // at kmw_base[0/1]+t.
  typedef struct packed {
    ewe_op_e        op;
    logic [15:0]    len;
    logic [3:0]     x_en;
    addr_t [3:0]    x_base;
    logic [1:0]     km_en;
    addr_t [1:0]    km_base;
    logic           wr_en;
    addr_t          wr_base;
    logic [1:0]     kmw_en;
    addr_t [1:0]    kmw_base;
    logic           cst_en;
    addr_t          cst_base;
    logic           prng_en;
    word_t          c0, c1;
  } ewe_instr_t;

  typedef enum logic {FU_NTTU = 1'b0, FU_AUTOU = 1'b1} fu_e;

  // NTTU / AutoU: one limb, vector t read at src_base+t in every lane and
  // its result vector written at dst_base+t.
  typedef struct packed {
    fu_e          unit;
    logic         inverse;   // NTTU: INTT
    logic [17:0]  g;         // AutoU: Galois element (odd, < 2N)
    loc_e         src;
    addr_t        src_base;
    loc_e         dst;
    addr_t        dst_base;
  } fu_instr_t;

  // BConvU: for coefficient pair p (0..npairs-1) and input limb i (0..nlimbs-1)
  // read the pair at src_base + i*stride + 2p; result (r, j) is written at
  // dst_base + j*stride + 2p + r.  Constants come from the cluster's BConv
  // constant table, entry i.
  typedef struct packed {
    logic [5:0]   nlimbs;
    logic [15:0]  npairs;
    addr_t        src_base;
    addr_t        dst_base;
    addr_t        stride;
    logic         recon;
  } bconv_instr_t;

endpackage
