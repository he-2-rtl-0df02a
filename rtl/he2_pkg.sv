// he2_pkg: word type, modulus type and modular arithmetic shared by every
// datapath of the accelerator.
//
// All arithmetic is on 36-bit words, the word width of both the xPU and the
// xMU. A modulus travels together with its Barrett constant
// mu = floor(2^72 / q), so that a multiplier can serve any RNS limb without a
// divider. Moduli are assumed to be 36-bit primes, 2^35 < q < 2^36, which is
// what Barrett reduction with k = 36 needs and what an NTT-friendly 36-bit
// prime satisfies (q = 1 mod 2^17 for N = 2^16). The reduction method and
// these bounds are this design's choice; the paper gives only the word width.
//
// Lint: in the Barrett helper only the top bits of the 74-bit product `q2` are
// needed; the low bits are dropped by design.
package he2_pkg;

  parameter int W = 36;                 // word width (paper: 36 bits)

  typedef logic [W-1:0] word_t;
  typedef logic [W:0]   mu_t;           // floor(2^(2W)/q), 37 bits

  typedef struct packed {
    word_t q;
    mu_t   mu;
  } modulus_t;

  // (a + b) mod q for a, b < q
  function automatic word_t mod_add(word_t a, word_t b, word_t q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[W-1:0];
  endfunction

  // (a - b) mod q for a, b < q
  function automatic word_t mod_sub(word_t a, word_t b, word_t q);
    logic [W:0] d;
    d = {1'b0, a} - {1'b0, b};
    if (a < b) d = d + {1'b0, q};
    return d[W-1:0];
  endfunction

  // Barrett reduction of x < 2^72 modulo a 36-bit q (HAC 14.42 with k = 36).
  function automatic word_t barrett(logic [2*W-1:0] x, modulus_t m);
    logic [W:0]       q1;
    logic [2*W+1:0]   q2;
    logic [W:0]       q3;
    logic [W+1:0]     r;
    q1 = x[2*W-1:W-1];
    q2 = q1 * m.mu;
    q3 = q2[2*W+1:W+1];
    r  = x[W+1:0] - (W+2)'({1'b0, q3} * {2'b00, m.q});
    if (r >= {2'b00, m.q}) r = r - {2'b00, m.q};
    if (r >= {2'b00, m.q}) r = r - {2'b00, m.q};
    return r[W-1:0];
  endfunction

  // (a * b) mod q for a, b < q
  function automatic word_t mod_mul(word_t a, word_t b, modulus_t m);
    return barrett(a * b, m);
  endfunction

  // Element-wise engine (xPU) operations
  typedef enum logic [2:0] {
    EW_PMUL   = 3'd0,   // (a0*c0, a1*c0)            ciphertext x plaintext
    EW_CADD   = 3'd1,   // (a0+b0, a1+b1)
    EW_CSUB   = 3'd2,   // (a0-b0, a1-b1)
    EW_IPMAC  = 3'd3,   // (b0+a0*c0, b1+a0*c1)      inner-product step
    EW_TENSOR = 3'd4    // (a0*c0, a0*c1+a1*c0, a1*c1)
  } ew_op_t;

  // xMU PE operations (one per MemOp or fused MemOp sequence)
  typedef enum logic [2:0] {
    XM_CADD    = 3'd0,  // y = a + b
    XM_PMUL    = 3'd1,  // y = a * b
    XM_IP      = 3'd2,  // acc += a * b, written on last
    XM_IP_PMUL = 3'd3,  // acc += a * b; on last write acc * pt (fused)
    XM_CSUB    = 3'd4,  // y = a - b
    XM_BYPASS  = 3'd5   // row-buffer data passed to the bank-group bus
  } xm_op_t;

  // Per-cycle activity of the top level, for statistics and test coverage
  typedef struct packed {
    logic [7:0] intt_starts;   // NTTUs starting an INTT this cycle
    logic [7:0] ntt_starts;    // NTTUs starting an NTT this cycle
    logic       alloc;         // NTTU allocation result valid
    logic       irf_row;       // row streamed from an NTTU to HBM
    logic       orig_row;      // original limb row copied to HBM during ModUp
    logic       evf_row;       // row written from HBM into the scratchpad
    logic [7:0] noc_waits;     // NoC clients refused by bank arbitration
    logic       xmu_allbank;   // every xMU bank read by its PE this cycle
    logic       ewe_op;        // element-wise engine operation issued
  } he2_events_t;

endpackage
