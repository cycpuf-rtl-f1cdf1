// cycpuf_pkg: types and functions shared by the CycPUF blocks.
//
// A delay-based PUF turns small, random, per-chip differences between
// nominally identical delay paths into response bits. Digital simulation has
// no process variation, so the behavioural PUF cores in this design draw each
// delay element's value from a hash of an instance seed (the "chip"), the
// chain or cell index, the stage index and the path. Same seed, same chip;
// different seed, a different chip off the same mask. Delays are in
// picoseconds around a nominal value with a uniform spread; both numbers are
// this design's choice, the paper gives none.
//
// The package also holds the rule that picks which response bits are fed
// back into which challenge bits. The paper picks them at random when it
// generates a CycPUF; here the choice is a deterministic function of a
// feedback seed, so one seed is one generated design.
package cycpuf_pkg;

  // PUF category (the three delay-based PUFs the framework offers).
  typedef enum logic [1:0] {
    PUF_APUF  = 2'd0,
    PUF_ROPUF = 2'd1,
    PUF_BPUF  = 2'd2
  } puf_category_e;

  // Nominal delay of one delay element and the half-width of its uniform
  // manufacturing spread, in ps.
  localparam int DELAY_NOM_PS = 100;
  localparam int DELAY_VAR_PS = 5;

  // 32-bit integer hash finaliser (xor-shift-multiply).
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [31:0] hash3(input logic [31:0] a, input logic [31:0] b,
                                        input logic [31:0] c);
    return mix32(a ^ mix32(b ^ mix32(c + 32'h9e3779b9)));
  endfunction

  // Delay of one element: instance seed, cell (chain, ring or latch pair),
  // stage along the cell, and path (which of the element's alternatives).
  function automatic int elem_delay_ps(input logic [31:0] seed, input int unsigned cell_idx,
                                       input int unsigned stage, input int unsigned path);
    logic [31:0] h;
    h = hash3(seed, 32'(cell_idx * 4096 + stage), 32'(path));
    return DELAY_NOM_PS + int'(h % 32'(2 * DELAY_VAR_PS + 1)) - DELAY_VAR_PS;
  endfunction

  // Signed jitter in [-noise, +noise] ps drawn from a noise state word.
  function automatic int jitter_ps(input logic [31:0] state, input int unsigned bit_idx,
                                   input int unsigned side, input int unsigned noise);
    logic [31:0] h;
    if (noise == 0) return 0;
    h = hash3(state, 32'(bit_idx), 32'(side) + 32'h5a5a0000);
    return int'(h % 32'(2 * noise + 1)) - int'(noise);
  endfunction

  // One step of a 32-bit xorshift generator (never reaches zero from a
  // non-zero state); it drives the per-evaluation noise of the cores.
  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  // Challenge bit that feedback path k drives: element k of a seeded random
  // permutation of 0..width-1, so the first `width` paths all land on
  // different challenge bits. The permutation is a bijection on b-bit words
  // (b = bits needed for width-1): multiply by an odd constant, add, fold the
  // high half onto the low half, multiply again; values >= width are mapped
  // again until they fall below width (cycle walking).
  function automatic int unsigned fb_chal_idx(input logic [31:0] seed, input int unsigned k,
                                              input int unsigned width);
    logic [31:0] a, b, c, x, mask;
    int unsigned nbits;
    logic        found;
    if (width <= 1) return 0;
    nbits = 0;
    while ((32'd1 << nbits) < 32'(width)) nbits++;
    mask  = (32'd1 << nbits) - 1;
    a = hash3(seed, 32'd1, 32'd0) | 32'd1;
    b = hash3(seed, 32'd2, 32'd0);
    c = hash3(seed, 32'd4, 32'd0) | 32'd1;
    x = 32'(k);
    found = 1'b0;
    // At most 2^nbits - width + 1 < 2*width steps before x is below width.
    for (int unsigned it = 0; it < 2 * width; it++) begin
      if (!found) begin
        x = (x * a + b) & mask;
        x = x ^ (x >> ((nbits + 1) / 2));
        x = (x * c) & mask;
        found = (x < 32'(width));
      end
    end
    return int'(x);
  endfunction

  // Response bit that feeds feedback path k (any response bit, repeats
  // allowed, so one response bit may feed several challenge bits).
  function automatic int unsigned fb_resp_idx(input logic [31:0] seed, input int unsigned k,
                                              input int unsigned width);
    if (width <= 1) return 0;
    return int'(hash3(seed, 32'd3, 32'(k)) % 32'(width));
  endfunction

endpackage
