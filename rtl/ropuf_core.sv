// ropuf_core: behavioural model of a ring oscillator PUF (ROPUF). Not
// synthesizable as a PUF: the response comes from manufacturing delay
// variation, which the model draws from a seed (see cycpuf_pkg).
//
// How it works: response bit j compares two ring oscillators, ring A and
// ring B. Each ring has CHAL_W configurable stages; challenge bit i picks one
// of two delay elements in stage i of both rings, so the challenge sets both
// ring periods. The bit is 1 when ring A is faster (its loop delay is the
// smaller), 0 otherwise (a tie also gives 0). A counter pair that counts
// the two rings' edges over a window and compares the counts reaches the
// same decision; the model compares the loop delays directly, each with its
// own random jitter of at most NOISE_PS ps drawn fresh for every
// evaluation.
//
// Interface and timing: every rising clk edge ends one comparison with the
// current chal and stores its result in resp, so resp is the response to the
// challenge one cycle earlier (one clock stands for one counting window).
// rst_n (asynchronous, active low) clears resp to 0.
//
// The paper names the ROPUF as one of its three PUF categories and cites it;
// the configurable-ring structure (which gives a 64-bit challenge a meaning
// for a single response bit), the delay numbers, the jitter and the
// one-window-per-clock timing are this model's choices.
module ropuf_core
  import cycpuf_pkg::*;
#(
  parameter int unsigned CHAL_W     = 64,
  parameter int unsigned RESP_W     = 1,
  parameter logic [31:0] SEED       = 32'h0000_b002,
  parameter int unsigned NOISE_PS   = 2,
  parameter logic [31:0] NOISE_SEED = 32'h2345_678a
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CHAL_W-1:0] chal,
  output logic [RESP_W-1:0] resp
);

  // Loop delay of ring r (cell index) under challenge c, in ps.
  function automatic int ring_delay(input logic [CHAL_W-1:0] c, input int unsigned r);
    int t;
    t = 0;
    for (int unsigned i = 0; i < CHAL_W; i++)
      t = t + elem_delay_ps(SEED, r, i, c[i] ? 1 : 0);
    return t;
  endfunction

  logic [31:0]       noise_q;
  logic [RESP_W-1:0] decide;

  always_comb begin
    for (int unsigned j = 0; j < RESP_W; j++)
      decide[j] = (ring_delay(chal, 2 * j) + jitter_ps(noise_q, j, 0, NOISE_PS))
                < (ring_delay(chal, 2 * j + 1) + jitter_ps(noise_q, j, 1, NOISE_PS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp    <= '0;
      noise_q <= (NOISE_SEED == 0) ? 32'h1 : NOISE_SEED;
    end else begin
      resp    <= decide;
      noise_q <= xorshift32(noise_q);
    end
  end

endmodule
