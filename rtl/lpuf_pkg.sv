// lpuf_pkg -- constants and helper functions shared by the lattice PUF.
//
// The lattice PUF computes the LWE decryption function r = Q(b - <a,s>) over
// Z_q, with q a power of two so that every modular operation is plain
// integer arithmetic truncated to LOGQ bits. The numbers here are the
// parameter set of the design: lattice dimension n = 160, q = 256 (LOGQ = 8),
// a 1280-bit secret key, a 256-bit LFSR with the feedback taps
// X255 ^ X253 ^ X250 ^ X245, and a [3,1] repetition inner code under a
// shortened BCH [212,128] outer code for key reconstruction (10 outer blocks,
// 6,360 raw cells), with GF(2^8) arithmetic for the BCH decoder. The split of the 256-bit LFSR seed into a 128-bit
// challenger seed and a 128-bit counter is this design's own reading (the
// 2^136 CRP space equals a 128-bit seed plus an 8-bit b').
package lpuf_pkg;

  // LWE parameters
  localparam int unsigned N_DIM  = 160;          // lattice dimension n
  localparam int unsigned LOGQ   = 8;            // log2(q)
  localparam int unsigned Q_MOD  = 1 << LOGQ;    // q = 256
  localparam int unsigned KEY_W  = N_DIM * LOGQ; // 1280 secret bits W

  // LFSR and challenge seed
  localparam int unsigned LFSR_W = 256;
  localparam int unsigned SEED_W = 128;          // challenger seed_a'
  localparam int unsigned CNT_W  = LFSR_W - SEED_W; // counter t
  // Feedback taps (0-based register indices) and the lowest tap, which
  // bounds the unrolling factor: P2 <= TAP3 + 1.
  localparam int unsigned TAP0 = 255;
  localparam int unsigned TAP1 = 253;
  localparam int unsigned TAP2 = 250;
  localparam int unsigned TAP3 = 245;

  // Fuzzy extractor code sizes
  localparam int unsigned REP_N    = 3;          // inner repetition length
  localparam int unsigned BCH_N    = 212;        // shortened BCH length
  localparam int unsigned BCH_K    = 128;        // BCH message length
  localparam int unsigned BCH_T    = 11;         // errors corrected per block
  localparam int unsigned BCH_BLKS = KEY_W / BCH_K;        // 10
  localparam int unsigned INNER_W  = BCH_BLKS * BCH_N;     // 2120
  localparam int unsigned RAW_W    = INNER_W * REP_N;      // 6360

  typedef logic [LOGQ-1:0] zq_t;                 // element of Z_q

  // GF(2^8) for the BCH decoder, built on x^8 + x^4 + x^3 + x^2 + 1.
  typedef logic [7:0] gf_t;
  localparam gf_t GF_POLY_LOW = 8'h1D;

  function automatic gf_t gf_mul(input gf_t a, input gf_t b);
    gf_t p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= aa;
      aa = {aa[6:0], 1'b0} ^ (aa[7] ? GF_POLY_LOW : 8'h00);
    end
    return p;
  endfunction

  // alpha^e with alpha = x (the primitive element), e taken modulo 255;
  // square-and-multiply over the 8 bits of e mod 255.
  function automatic gf_t gf_alpha_pow(input int e);
    gf_t v, sq;
    logic [7:0] ee;
    v  = 8'h01;
    sq = 8'h02;
    ee = 8'(e % 255);
    for (int i = 0; i < 8; i++) begin
      if (ee[i]) v = gf_mul(v, sq);
      sq = gf_mul(sq, sq);
    end
    return v;
  endfunction

  // Quantizer Q(x): 0 for x in [0, q/4] or (3q/4, q-1], 1 for x in (q/4, 3q/4].
  function automatic logic quantize(input zq_t x);
    return (int'(x) > int'(Q_MOD / 4)) && (int'(x) <= int'(3 * Q_MOD / 4));
  endfunction

endpackage
