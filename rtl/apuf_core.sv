// apuf_core: behavioural model of an arbiter PUF (APUF). Not synthesizable
// as a PUF: the response comes from manufacturing delay variation, which the
// model draws from a seed (see cycpuf_pkg).
//
// How it works: each response bit j has its own chain of CHAL_W switch
// stages. A rising edge enters the top and bottom paths together. In stage i
// the two signals go straight through when chal[i] = 0 and swap paths when
// chal[i] = 1; each of the four ways through a stage has its own delay. The
// arbiter at the end outputs 1 when the edge on the top path arrives first,
// 0 otherwise (a tie also gives 0). Its decision is the sign of the
// accumulated top-minus-bottom delay plus a random jitter of at most
// NOISE_PS ps, drawn fresh for every evaluation; the jitter stands for
// thermal noise and makes challenges whose delay difference is small
// unreliable, as in silicon.
//
// Interface and timing: every rising clk edge launches one race with the
// current chal and the arbiter's decision appears on resp after that edge,
// so resp is the response to the challenge one cycle earlier. rst_n
// (asynchronous, active low) clears resp to 0.
//
// The paper names the APUF as one of its three PUF categories and cites it;
// the chain structure, the delay numbers, the jitter and the one-race-per-
// clock timing are this model's choices.
module apuf_core
  import cycpuf_pkg::*;
#(
  parameter int unsigned CHAL_W     = 64,
  parameter int unsigned RESP_W     = 1,
  parameter logic [31:0] SEED       = 32'h0000_a001,
  parameter int unsigned NOISE_PS   = 2,
  parameter logic [31:0] NOISE_SEED = 32'h1234_5679
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CHAL_W-1:0] chal,
  output logic [RESP_W-1:0] resp
);

  // Top-minus-bottom arrival time at the arbiter of chain j, in ps.
  function automatic int race_diff(input logic [CHAL_W-1:0] c, input int unsigned j);
    int t_top, t_bot, n_top, n_bot;
    t_top = 0;
    t_bot = 0;
    for (int unsigned i = 0; i < CHAL_W; i++) begin
      if (!c[i]) begin
        n_top = t_top + elem_delay_ps(SEED, j, i, 0);
        n_bot = t_bot + elem_delay_ps(SEED, j, i, 1);
      end else begin
        n_top = t_bot + elem_delay_ps(SEED, j, i, 2);
        n_bot = t_top + elem_delay_ps(SEED, j, i, 3);
      end
      t_top = n_top;
      t_bot = n_bot;
    end
    return t_top - t_bot;
  endfunction

  logic [31:0]       noise_q;
  logic [RESP_W-1:0] decide;

  always_comb begin
    for (int unsigned j = 0; j < RESP_W; j++)
      decide[j] = (race_diff(chal, j) + jitter_ps(noise_q, j, 0, NOISE_PS)) < 0;
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
