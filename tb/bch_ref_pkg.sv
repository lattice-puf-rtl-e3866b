// bch_ref_pkg: reference BCH encoder used by the testbenches to build
// enrollment data (codewords and helper data) independently of the RTL.
//
// The generator polynomial of the binary BCH code of length 255 with
// designed distance 2T+1 is the product of (x + alpha^e) over every exponent
// e in the cyclotomic cosets (e -> 2e mod 255) of 1 .. 2T; its coefficients
// are checked to be binary. Field multiplication here works by carry-less
// multiplication followed by reduction, a different method from the RTL's.
// Encoding is systematic: codeword = msg * x^P + (msg * x^P mod g), P = deg g.
package bch_ref_pkg;

  localparam int unsigned MAXP = 256;

  function automatic logic [7:0] ref_gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= (16'(a) << i);
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= (16'h11D << (i - 8));
    return p[7:0];
  endfunction

  function automatic logic [7:0] ref_alpha(input int e);
    logic [7:0] r;
    r = 8'h01;
    for (int i = 0; i < e % 255; i++) r = ref_gf_mul(r, 8'h02);
    return r;
  endfunction

  // generator polynomial; returns its degree in deg, ok = 0 if not binary
  function automatic logic [MAXP-1:0] gen_poly(input int t, output int deg, output bit ok);
    logic [7:0] g [MAXP];
    bit         in_set [255];
    logic [MAXP-1:0] gb;
    for (int i = 0; i < 255; i++) in_set[i] = 0;
    for (int j = 1; j <= 2 * t; j++) begin
      int e;
      e = j;
      for (int k = 0; k < 8; k++) begin
        in_set[e] = 1;
        e = (2 * e) % 255;
      end
    end
    for (int i = 0; i < MAXP; i++) g[i] = '0;
    g[0] = 8'h01;
    deg = 0;
    for (int e = 0; e < 255; e++) if (in_set[e]) begin
      logic [7:0] root;
      root = ref_alpha(e);
      for (int i = deg + 1; i >= 1; i--) g[i] = g[i-1] ^ ref_gf_mul(g[i], root);
      g[0] = ref_gf_mul(g[0], root);
      deg++;
    end
    ok = 1;
    gb = '0;
    for (int i = 0; i <= deg; i++) begin
      if (g[i] > 8'h01) ok = 0;
      gb[i] = g[i][0];
    end
    return gb;
  endfunction

  // systematic encoding of the kmsg-bit msg into an n-bit codeword, n = kmsg + deg
  function automatic logic [MAXP-1:0] encode(input logic [MAXP-1:0] msg, input int kmsg,
                                             input logic [MAXP-1:0] g, input int deg);
    logic [MAXP-1:0] rem, cw;
    bit fb;
    rem = '0;
    for (int i = kmsg - 1; i >= 0; i--) begin
      fb  = msg[i] ^ rem[deg-1];
      rem = (rem << 1) & ((MAXP'(1) << deg) - 1);
      if (fb) rem ^= (g & ((MAXP'(1) << deg) - 1));
    end
    cw = (msg << deg) | rem;
    return cw;
  endfunction

endpackage
