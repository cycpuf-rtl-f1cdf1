// cycpuf_ref_pkg: reference model of the CycPUF blocks for the testbenches.
//
// Written apart from the RTL: it recomputes, with its own code, the delay of
// every element of a PUF chip from the chip seed, the noise-free delay
// difference each core turns into a response bit, and the feedback
// positions of a generated CycPUF. The formulas are the documented ones:
//   element delay = 100 + (H(seed, cell*4096 + stage, path) mod 11) - 5  ps
//   H(a,b,c)      = M(a ^ M(b ^ M(c + 0x9e3779b9)))
//   M(x)          = murmur-style finaliser: x^=x>>16; x*=0x7feb352d;
//                   x^=x>>15; x*=0x846ca68b; x^=x>>16   (32-bit)
//   feedback k    : challenge bit P(k), P a permutation of 0..W-1 on b-bit
//                   words (2^b >= W): x -> ((x*A + B) mod 2^b), x ^= x >> ceil(b/2),
//                   x -> (x*C mod 2^b), repeated while x >= W; A = H(s,1,0)|1,
//                   B = H(s,2,0), C = H(s,4,0)|1. Response bit H(s,3,k) mod RESP_W.
// Responses: APUF 1 when the top path wins (difference < 0), ROPUF 1 when
// ring A is faster, BPUF 1 when the left path is faster.
package cycpuf_ref_pkg;

  function automatic bit [31:0] ref_m(bit [31:0] x);
    bit [63:0] p;
    x = x ^ {16'h0, x[31:16]};
    p = 64'(x) * 64'h7feb352d;
    x = p[31:0];
    x = x ^ {15'h0, x[31:15]};
    p = 64'(x) * 64'h846ca68b;
    x = p[31:0];
    x = x ^ {16'h0, x[31:16]};
    return x;
  endfunction

  function automatic bit [31:0] ref_h(bit [31:0] a, bit [31:0] b, bit [31:0] c);
    return ref_m(a ^ ref_m(b ^ ref_m(c + 32'h9e3779b9)));
  endfunction

  function automatic int ref_delay(bit [31:0] seed, int cidx, int stage, int path);
    bit [31:0] h;
    h = ref_h(seed, 32'(cidx * 4096 + stage), 32'(path));
    return 95 + int'(h % 11);
  endfunction

  // APUF chain j: top-minus-bottom arrival difference.
  function automatic int ref_apuf_diff(bit [31:0] seed, bit [63:0] c, int w, int j);
    int a, b, t;
    a = 0;
    b = 0;
    for (int i = 0; i < w; i++) begin
      if (c[i]) begin
        t = a;
        a = b + ref_delay(seed, j, i, 2);
        b = t + ref_delay(seed, j, i, 3);
      end else begin
        a = a + ref_delay(seed, j, i, 0);
        b = b + ref_delay(seed, j, i, 1);
      end
    end
    return a - b;
  endfunction

  // ROPUF bit j: ring A delay minus ring B delay (negative: A faster).
  function automatic int ref_ropuf_diff(bit [31:0] seed, bit [63:0] c, int w, int j);
    int a, b;
    a = 0;
    b = 0;
    for (int i = 0; i < w; i++) begin
      a += ref_delay(seed, 2 * j, i, int'(c[i]));
      b += ref_delay(seed, 2 * j + 1, i, int'(c[i]));
    end
    return a - b;
  endfunction

  // BPUF cell j: left path delay minus right path delay.
  function automatic int ref_bpuf_diff(bit [31:0] seed, bit [63:0] c, int w, int j);
    int a, b;
    a = 0;
    b = 0;
    for (int i = 0; i < w; i++) begin
      a += ref_delay(seed, j, i, int'(c[i]));
      b += ref_delay(seed, j, i, 2 + int'(c[i]));
    end
    return a - b;
  endfunction

  // cat: 0 APUF, 1 ROPUF, 2 BPUF
  function automatic int ref_diff(int cat, bit [31:0] seed, bit [63:0] c, int w, int j);
    case (cat)
      0:       return ref_apuf_diff(seed, c, w, j);
      1:       return ref_ropuf_diff(seed, c, w, j);
      default: return ref_bpuf_diff(seed, c, w, j);
    endcase
  endfunction

  function automatic int ref_fb_chal(bit [31:0] s, int k, int w);
    int nb;
    longint unsigned x, m, a, b, c;
    if (w <= 1) return 0;
    nb = 0;
    while ((1 << nb) < w) nb++;
    m = (64'd1 << nb);
    a = 64'(ref_h(s, 1, 0) | 1);
    b = 64'(ref_h(s, 2, 0));
    c = 64'(ref_h(s, 4, 0) | 1);
    x = 64'(k);
    forever begin
      x = (x * a + b) % m;
      x = x ^ (x >> ((nb + 1) / 2));
      x = (x * c) % m;
      if (x < 64'(w)) break;
    end
    return int'(x);
  endfunction

  function automatic int ref_fb_resp(bit [31:0] s, int k, int rw);
    if (rw <= 1) return 0;
    return int'(ref_h(s, 3, 32'(k)) % 32'(rw));
  endfunction

  // Effective challenge of a CycPUF: chal with fed-back response bits XORed in.
  function automatic bit [63:0] ref_chal_eff(bit [31:0] s, bit [63:0] c, bit [63:0] r,
                                             int w, int rw, int nfb);
    bit [63:0] e;
    e = c;
    for (int k = 0; k < nfb; k++)
      if (r[ref_fb_resp(s, k, rw)]) e[ref_fb_chal(s, k, w)] ^= 1'b1;
    return e;
  endfunction

endpackage
