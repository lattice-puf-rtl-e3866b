// lattice_puf_pkg: sizes, types and GF(2^8) helpers shared by the lattice PUF.
//
// The LWE sizes follow the published parameter set for 128-bit ML hardness:
// lattice dimension n = 160, modulus q = 256 (log q = 8), so the secret key
// is n*log q = 1280 bits. The LFSR is 256 bits long; its seed is the
// challenger's 128-bit seed concatenated with a 128-bit counter value, which
// gives 128 seed bits + 8 bits of b' = 136 challenge bits per response.
// The fuzzy-extractor sizes follow the 5 % raw-BER column of the code table:
// inner repetition code [3,1,1], outer shortened BCH [218,128,t=11],
// ten outer blocks of 128 bits make the 1280-bit key from 6,540 raw bits.
//
// Own choices: the LFSR feedback taps (256,254,251,246, a maximal-length
// polynomial), the GF(2^8) field polynomial x^8+x^4+x^3+x^2+1, and the
// controller state encoding.
package lattice_puf_pkg;

  // ---------------- LWE decryption ----------------
  parameter int unsigned N_DIM  = 160;               // lattice dimension n
  parameter int unsigned LOG_Q  = 8;                 // log2 q, q = 256
  parameter int unsigned KEY_W  = N_DIM * LOG_Q;     // 1280 secret bits
  parameter int unsigned LFSR_W = 256;               // LFSR length
  parameter int unsigned CNT_W  = 128;               // counter width
  parameter int unsigned SEED_W = LFSR_W - CNT_W;    // challenger seed bits

  // Feedback taps 256,254,251,246 (1-based), taken from the usual tables of
  // maximal-length LFSRs: x^256 + x^254 + x^251 + x^246 + 1.
  parameter logic [LFSR_W-1:0] LFSR_TAPS =
      (LFSR_W'(1) << 255) | (LFSR_W'(1) << 253) |
      (LFSR_W'(1) << 250) | (LFSR_W'(1) << 245);

  // ---------------- fuzzy extractor ----------------
  parameter int unsigned REP       = 3;              // inner repetition length
  parameter int unsigned BCH_N     = 218;            // shortened outer length
  parameter int unsigned BCH_K     = 128;            // key bits per outer block
  parameter int unsigned BCH_T     = 11;             // correctable errors
  parameter int unsigned FE_BLOCKS = KEY_W / BCH_K;  // 10 outer blocks
  parameter int unsigned RAW_BITS  = FE_BLOCKS * BCH_N * REP; // 6540 cells

  // GF(2^8) with primitive polynomial x^8 + x^4 + x^3 + x^2 + 1
  parameter int unsigned GF_M    = 8;
  parameter logic [8:0]  GF_POLY = 9'h11D;
  typedef logic [GF_M-1:0] gf_t;

  function automatic gf_t gf_mul(input gf_t a, input gf_t b);
    gf_t p;
    gf_t aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < GF_M; i++) begin
      if (b[i]) p ^= aa;
      aa = {aa[GF_M-2:0], 1'b0} ^ (aa[GF_M-1] ? GF_POLY[GF_M-1:0] : '0);
    end
    return p;
  endfunction

  // alpha^e, alpha being the root of GF_POLY (element 8'h02)
  function automatic gf_t gf_alpha_pow(input int unsigned e);
    gf_t r, base;
    logic [GF_M-1:0] ex;
    ex   = GF_M'(e % 255);
    r    = gf_t'(1);
    base = gf_t'(2);
    for (int i = 0; i < GF_M; i++) begin   // square and multiply
      if (ex[i]) r = gf_mul(r, base);
      base = gf_mul(base, base);
    end
    return r;
  endfunction

  // ---------------- controller ----------------
  typedef enum logic [2:0] {
    C_IDLE,   // waiting for a challenge seed (and for the key)
    C_LOAD,   // shifting seed||t into the LFSR, one bit per clock
    C_READY,  // waiting for b' (or a new seed)
    C_GEN,    // stepping the LFSR log q times to build a'_i
    C_MAC,    // one multiply-accumulate stage y <- y - a'_i * s_i
    C_DONE    // response r valid
  } ctrl_state_e;

endpackage
