// cycpuf_top: the three strong CycPUFs of the security evaluation on one
// chip: a cyclic arbiter PUF, a cyclic ring oscillator PUF and a cyclic
// butterfly PUF, each with a 64-bit challenge and a single response bit.
//
// All three receive the same applied challenge and answer in parallel. The
// feedback counts are those of the evaluated designs: 4 paths in the
// CycAPUF, 16 in the CycROPUF and 12 in the CycBPUF. With one response bit,
// every path XORs that bit into a different challenge bit, so a PUF
// alternates between evaluating chal and chal with its NFB feedback bits
// inverted, depending on its own last response.
//
// Interface and timing: chal is held by the user; each resp_* is a new
// response every clock cycle, the first one valid after the first rising clk
// edge following the release of rst_n (asynchronous, active low), which
// clears all responses to 0. chal_eff_* show the challenge each core sees
// in the current cycle.
//
// Following the paper: the sizes and feedback counts. This design's
// choices: putting the three PUFs side by side on one challenge bus (the
// paper evaluates them separately) and the chip and noise seeds, which
// stand in for one manufactured instance.
module cycpuf_top
  import cycpuf_pkg::*;
#(
  parameter int unsigned CHAL_W    = 64,
  parameter int unsigned RESP_W    = 1,
  parameter int unsigned NFB_APUF  = 4,
  parameter int unsigned NFB_ROPUF = 16,
  parameter int unsigned NFB_BPUF  = 12,
  parameter logic [31:0] CHIP_SEED = 32'h0c1c_0001,
  parameter int unsigned NOISE_PS  = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CHAL_W-1:0] chal,
  output logic [RESP_W-1:0] resp_apuf,
  output logic [RESP_W-1:0] resp_ropuf,
  output logic [RESP_W-1:0] resp_bpuf,
  output logic [CHAL_W-1:0] chal_eff_apuf,
  output logic [CHAL_W-1:0] chal_eff_ropuf,
  output logic [CHAL_W-1:0] chal_eff_bpuf
);

  cycpuf #(
    .CATEGORY(PUF_APUF), .CHAL_W(CHAL_W), .RESP_W(RESP_W), .NFB(NFB_APUF),
    .PUF_SEED(mix32(CHIP_SEED ^ 32'h0000_0a01)), .FB_SEED(32'h0000_f0a1),
    .NOISE_PS(NOISE_PS), .NOISE_SEED(mix32(CHIP_SEED ^ 32'h0000_0a02))
  ) u_cycapuf (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(resp_apuf), .chal_eff(chal_eff_apuf)
  );

  cycpuf #(
    .CATEGORY(PUF_ROPUF), .CHAL_W(CHAL_W), .RESP_W(RESP_W), .NFB(NFB_ROPUF),
    .PUF_SEED(mix32(CHIP_SEED ^ 32'h0000_0b01)), .FB_SEED(32'h0000_f0b1),
    .NOISE_PS(NOISE_PS), .NOISE_SEED(mix32(CHIP_SEED ^ 32'h0000_0b02))
  ) u_cycropuf (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(resp_ropuf), .chal_eff(chal_eff_ropuf)
  );

  cycpuf #(
    .CATEGORY(PUF_BPUF), .CHAL_W(CHAL_W), .RESP_W(RESP_W), .NFB(NFB_BPUF),
    .PUF_SEED(mix32(CHIP_SEED ^ 32'h0000_0c01)), .FB_SEED(32'h0000_f0c1),
    .NOISE_PS(NOISE_PS), .NOISE_SEED(mix32(CHIP_SEED ^ 32'h0000_0c02))
  ) u_cycbpuf (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(resp_bpuf), .chal_eff(chal_eff_bpuf)
  );

endmodule
