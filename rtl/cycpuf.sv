// cycpuf: one cyclic PUF (CycPUF), a delay-based PUF core with part of its
// response fed back into its own challenge input.
//
// The core (arbiter, ring oscillator or butterfly PUF, chosen by CATEGORY)
// stores one response vector per clock cycle. cyc_feedback XORs NFB of the
// stored response bits into NFB of the applied challenge bits, and the core
// evaluates that effective challenge. With the applied challenge held
// constant the response therefore evolves as
//
//   R(n+1) = PUF(chal ^ F(R(n))),   R(0) = 0 after reset,
//
// and shows one of four response modes: binary (R never changes), steady
// state (R changes for a while, then settles on a fixed value), oscillating
// (R settles into a repeating cycle of two or more values) or pseudo-random
// (no pattern; it happens when an effective challenge lands where the
// core's delay difference is within its noise). NFB = 0 gives the acyclic
// PUF.
//
// Interface and timing: chal is the applied challenge; resp is R(n), valid
// from the first rising clk edge after rst_n is released, one new vector per
// cycle; chal_eff is the challenge the core sees this cycle, brought out so
// that the feedback can be observed. rst_n is asynchronous, active low.
//
// Following the paper: the three categories, the XOR feedback from response
// to challenge, the feedback count as a generator parameter, and the four
// response modes. This design's choices: the loop is closed through the
// core's clocked response storage (one new response per clock cycle, the
// granularity at which the paper counts responses), and R(0) = 0.
module cycpuf
  import cycpuf_pkg::*;
#(
  parameter puf_category_e CATEGORY   = PUF_APUF,
  parameter int unsigned   CHAL_W     = 64,
  parameter int unsigned   RESP_W     = 1,
  parameter int unsigned   NFB        = 4,
  parameter logic [31:0]   PUF_SEED   = 32'h0000_a001,
  parameter logic [31:0]   FB_SEED    = 32'h0000_f001,
  parameter int unsigned   NOISE_PS   = 2,
  parameter logic [31:0]   NOISE_SEED = 32'h1234_5679
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CHAL_W-1:0] chal,
  output logic [RESP_W-1:0] resp,
  output logic [CHAL_W-1:0] chal_eff
);

  cyc_feedback #(
    .CHAL_W (CHAL_W),
    .RESP_W (RESP_W),
    .NFB    (NFB),
    .FB_SEED(FB_SEED)
  ) u_fb (
    .chal    (chal),
    .resp    (resp),
    .chal_eff(chal_eff)
  );

  if (CATEGORY == PUF_APUF) begin : g_apuf
    apuf_core #(
      .CHAL_W(CHAL_W), .RESP_W(RESP_W), .SEED(PUF_SEED),
      .NOISE_PS(NOISE_PS), .NOISE_SEED(NOISE_SEED)
    ) u_core (
      .clk(clk), .rst_n(rst_n), .chal(chal_eff), .resp(resp)
    );
  end else if (CATEGORY == PUF_ROPUF) begin : g_ropuf
    ropuf_core #(
      .CHAL_W(CHAL_W), .RESP_W(RESP_W), .SEED(PUF_SEED),
      .NOISE_PS(NOISE_PS), .NOISE_SEED(NOISE_SEED)
    ) u_core (
      .clk(clk), .rst_n(rst_n), .chal(chal_eff), .resp(resp)
    );
  end else begin : g_bpuf
    bpuf_core #(
      .CHAL_W(CHAL_W), .RESP_W(RESP_W), .SEED(PUF_SEED),
      .NOISE_PS(NOISE_PS), .NOISE_SEED(NOISE_SEED)
    ) u_core (
      .clk(clk), .rst_n(rst_n), .chal(chal_eff), .resp(resp)
    );
  end

endmodule
