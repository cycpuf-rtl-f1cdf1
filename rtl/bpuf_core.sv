// bpuf_core: behavioural model of a butterfly PUF (BPUF). Not synthesizable
// as a PUF: the response comes from manufacturing delay variation, which the
// model draws from a seed (see cycpuf_pkg).
//
// How it works: response bit j is one butterfly cell, two cross-coupled
// latches. The cell is first excited into its unstable state and then
// released; it settles to the side whose feedback path is faster. Each of the
// two feedback paths runs through CHAL_W configurable stages, and challenge
// bit i picks one of two delay elements in stage i of both paths, so the
// challenge sets the cell's imbalance. The bit is 1 when the left path is
// faster, 0 otherwise (a tie also gives 0). Each path's delay carries a
// random jitter of at most NOISE_PS ps drawn fresh for every release; it
// decides cells whose imbalance is that small.
//
// Interface and timing: each clock cycle is one excite-and-release; the
// settled value is stored in resp at the rising clk edge, so resp is the
// response to the challenge one cycle earlier. rst_n (asynchronous, active
// low) clears resp to 0.
//
// The paper names the BPUF as one of its three PUF categories and cites it;
// the challenge-configured feedback paths, the delay numbers, the jitter and
// the one-release-per-clock timing are this model's choices.
module bpuf_core
  import cycpuf_pkg::*;
#(
  parameter int unsigned CHAL_W     = 64,
  parameter int unsigned RESP_W     = 1,
  parameter logic [31:0] SEED       = 32'h0000_c003,
  parameter int unsigned NOISE_PS   = 2,
  parameter logic [31:0] NOISE_SEED = 32'h3456_789b
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CHAL_W-1:0] chal,
  output logic [RESP_W-1:0] resp
);

  // Delay of the left (side 0) or right (side 1) feedback path of cell j.
  function automatic int side_delay(input logic [CHAL_W-1:0] c, input int unsigned j,
                                    input int unsigned side);
    int t;
    t = 0;
    for (int unsigned i = 0; i < CHAL_W; i++)
      t = t + elem_delay_ps(SEED, j, i, 2 * side + (c[i] ? 1 : 0));
    return t;
  endfunction

  logic [31:0]       noise_q;
  logic [RESP_W-1:0] settle;

  always_comb begin
    for (int unsigned j = 0; j < RESP_W; j++)
      settle[j] = (side_delay(chal, j, 0) + jitter_ps(noise_q, j, 0, NOISE_PS))
                < (side_delay(chal, j, 1) + jitter_ps(noise_q, j, 1, NOISE_PS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp    <= '0;
      noise_q <= (NOISE_SEED == 0) ? 32'h1 : NOISE_SEED;
    end else begin
      resp    <= settle;
      noise_q <= xorshift32(noise_q);
    end
  end

endmodule
