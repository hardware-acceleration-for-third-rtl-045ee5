// fhe_pkg: types, constants and small helper functions shared by the
// third-generation FHE accelerator (RLWE x RGSW and RLWE substitution/key
// switch engine).
//
// Sizes follow the published prototype: coefficients up to 54 bits, polynomial
// length up to N = 2048 (log N = 11), two butterflies per NTT/INTT unit so one
// buffer line holds two consecutive coefficients (1024 x 108 bit per buffer),
// four INTT modules in parallel. Streams between blocks carry one "quad" of
// four consecutive coefficients per beat (two buffer lines), which is this
// design's choice. Instruction and tag encodings are also this design's own.
package fhe_pkg;

  parameter int unsigned COEFF_W  = 54;     // widest supported modulus Q
  parameter int unsigned LOGN_MAX = 11;     // N = 2048
  parameter int unsigned N_MAX    = 1 << LOGN_MAX;
  parameter int unsigned N_INTT   = 4;      // log(N)/dc INTT modules
  parameter int unsigned KEY_AW   = 32;     // DDR beat address width

  typedef logic [COEFF_W-1:0]   coeff_t;
  typedef coeff_t [1:0]         line_t;    // one buffer line, two coefficients
  typedef coeff_t [3:0]         quad_t;    // one stream beat, four coefficients
  typedef quad_t  [1:0]         key_beat_t; // [0]: key poly a, [1]: key poly b

  // Runtime configuration written by the host through the AXI-Lite port.
  typedef struct packed {
    coeff_t      q;          // ciphertext modulus Q
    logic [55:0] mu;         // Barrett constant floor(2^(2*qbits)/Q)
    logic [5:0]  qbits;      // bit length of Q
    logic [3:0]  logn;       // 10 or 11
    coeff_t      n_inv;      // N^-1 mod Q
    logic [3:0]  dc;         // digits of the decomposition, 1..15
    logic [3:0]  bg_bits;    // log2 of the decomposition base B_G (= B_KS)
    logic [3:0]  lwe_logq;   // log2 of the LWE modulus q (for the init block)
    coeff_t      init_val;   // test-vector coefficient used by the init block
  } cfg_t;

  typedef enum logic [0:0] {
    OP_RGSW = 1'b0,          // RLWE (x) RGSW   (bootstrap / CMUX / LUT)
    OP_KS   = 1'b1           // RLWE substitution followed by key switch
  } op_e;

  typedef struct packed {
    op_e                 op;
    logic                init;      // OP_RGSW only: start from the init block
    logic [10:0]         b_lwe;     // b of the LWE ciphertext (init)
    logic [LOGN_MAX:0]   subs_k;    // odd exponent k of X -> X^k (OP_KS)
    logic [KEY_AW-1:0]   key_addr;  // first DDR beat of the key
  } inst_t;

  // Tag that travels with each polynomial through the NTT side.
  typedef struct packed {
    logic       op_ks;      // polynomial belongs to an OP_KS instruction
    logic       is_b;       // polynomial b of the RLWE (else a)
    logic       first;      // first product of the accumulation
    logic       last;       // last polynomial of the RLWE
    logic       direct;     // add to acc b without a key (KS: the b poly)
    logic [3:0] digit;      // decomposition digit index
  } tag_t;

  // Address pattern of one butterfly pass with half distance t = 2^lt on a
  // polynomial of length 2^logn, step c (0 .. N/4-1). Two butterflies per step.
  // For t >= 2 they use lines l0 = j/2 and l1 = (j+t)/2 (pattern 1, same
  // twiddle); for t = 1 they use lines 2c and 2c+1 (pattern 2, pair inside
  // each line, two twiddles). tf0/tf1 are the twiddle indices N/(2t) + group.
  typedef struct packed {
    logic [LOGN_MAX-2:0] l0, l1;
    logic [LOGN_MAX-1:0] tf0, tf1;
  } pass_addr_t;

  function automatic pass_addr_t pass_addr(input logic [3:0] logn,
                                           input logic [3:0] lt,
                                           input logic [LOGN_MAX-3:0] c);
    pass_addr_t r;
    logic [LOGN_MAX-1:0] j, g, o, m;
    m = LOGN_MAX'(1) << (logn - lt - 4'd1);
    if (lt == 0) begin
      r.l0  = {c, 1'b0};
      r.l1  = {c, 1'b1};
      r.tf0 = m + {c, 1'b0};
      r.tf1 = m + {c, 1'b1};
    end else begin
      g     = LOGN_MAX'({c, 1'b0}) >> lt;                        // group index
      o     = LOGN_MAX'({c, 1'b0}) & ((LOGN_MAX'(1) << lt) - 1); // offset in group
      j     = (g << (lt + 4'd1)) + o;
      r.l0  = (LOGN_MAX-1)'(j >> 1);
      r.l1  = (LOGN_MAX-1)'((j + (LOGN_MAX'(1) << lt)) >> 1);
      r.tf0 = m + g;
      r.tf1 = m + g;
    end
    return r;
  endfunction

  function automatic coeff_t mod_add(input coeff_t a, input coeff_t b, input coeff_t q);
    logic [COEFF_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= {1'b0, q}) ? COEFF_W'(s - {1'b0, q}) : COEFF_W'(s);
  endfunction

  function automatic coeff_t mod_sub(input coeff_t a, input coeff_t b, input coeff_t q);
    return (a >= b) ? a - b : a + (q - b);
  endfunction

  function automatic coeff_t mod_neg(input coeff_t a, input coeff_t q);
    return (a == '0) ? '0 : q - a;
  endfunction

endpackage
