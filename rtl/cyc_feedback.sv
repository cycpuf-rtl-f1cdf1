// cyc_feedback: the feedback network that makes a delay-based PUF cyclic.
//
// A CycPUF takes a few bits of the response vector, XORs each with one bit of
// the applied challenge, and routes the XOR output into the PUF's challenge
// input in place of that challenge bit. The applied challenge can then stay
// constant while the response keeps changing. This module is that network and
// nothing else: for feedback path k it computes
//
//   chal_eff[CI(k)] = chal[CI(k)] ^ resp[RI(k)]
//
// and passes every challenge bit that no path drives straight through. With
// NFB = 0 the PUF is acyclic (chal_eff = chal).
//
// Following the paper: XOR of a response bit with a challenge bit, fed back
// into the challenge input; bit positions chosen at random per generated
// design. This design's choice: the "random" positions are a deterministic
// function of FB_SEED (cycpuf_pkg::fb_chal_idx / fb_resp_idx, a seeded
// random permutation of the challenge bits), the driven
// challenge bits are all different (so NFB <= CHAL_W), and several paths may
// share one response bit, which is what the paper's single-bit-response
// CycPUFs with 4 to 16 feedback paths require.
//
// Interface and timing: purely combinational, no clock. resp comes from the
// PUF core's response storage; chal_eff goes to the core's challenge input.
// Only NFB of the CHAL_W output bits carry an XOR; the others are the
// challenge bits wired straight through, as the construction requires.
module cyc_feedback
  import cycpuf_pkg::*;
#(
  parameter int unsigned CHAL_W  = 64,
  parameter int unsigned RESP_W  = 1,
  parameter int unsigned NFB     = 4,
  parameter logic [31:0] FB_SEED = 32'h0000_c0fe
) (
  input  logic [CHAL_W-1:0] chal,
  input  logic [RESP_W-1:0] resp,
  output logic [CHAL_W-1:0] chal_eff
);

  if (NFB > CHAL_W) begin : g_bad_nfb
    $error("cyc_feedback: NFB (%0d) exceeds CHAL_W (%0d)", NFB, CHAL_W);
  end

  // One-hot XOR masks per response bit: fb_mask[j] has a 1 at every
  // challenge bit fed by response bit j.
  logic [RESP_W-1:0][CHAL_W-1:0] fb_mask;

  for (genvar j = 0; j < RESP_W; j++) begin : g_mask
    always_comb begin
      fb_mask[j] = '0;
      for (int k = 0; k < int'(NFB); k++) begin
        if (fb_resp_idx(FB_SEED, k, RESP_W) == j)
          fb_mask[j][fb_chal_idx(FB_SEED, k, CHAL_W)] = 1'b1;
      end
    end
  end

  always_comb begin
    chal_eff = chal;
    for (int j = 0; j < RESP_W; j++) begin
      if (resp[j]) chal_eff = chal_eff ^ fb_mask[j];
    end
  end

endmodule
