// tb_bpuf_core: self-checking testbench of the butterfly PUF model.
//
// Two instances of the same chip seed: one without noise, whose responses
// must equal the reference model's for every challenge, and one with the
// default jitter, whose responses must equal the reference wherever the
// noise-free delay difference is larger than the jitter can overturn. Also
// checked: the reset value, the one-cycle latency (the response to a
// challenge appears after the next rising edge, not before), and that the
// second response bit answers from its own butterfly cell. A third instance
// with another seed (another chip) must disagree with the first on part of
// the challenges, which is where uniqueness comes from.
module tb_bpuf_core;
  import cycpuf_ref_pkg::*;

  localparam int W = 64;
  localparam bit [31:0] S0 = 32'h1357_9bdf;
  localparam bit [31:0] S1 = 32'h2468_ace0;
  localparam int NOISE = 2;

  int checks = 0, failures = 0;
  int differ = 0, noisy_checked = 0;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] chal;
  logic [1:0] r_q, r_n, r_o;

  bpuf_core #(.CHAL_W(W), .RESP_W(2), .SEED(S0), .NOISE_PS(0)) u_q (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(r_q));
  bpuf_core #(.CHAL_W(W), .RESP_W(2), .SEED(S0), .NOISE_PS(NOISE), .NOISE_SEED(32'h77)) u_n (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(r_n));
  bpuf_core #(.CHAL_W(W), .RESP_W(2), .SEED(S1), .NOISE_PS(0)) u_o (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(r_o));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [1:0] exp, exp_o, prev;
    int d;
    chal = '0;
    #12;
    check(r_q == 0 && r_n == 0 && r_o == 0, "responses not cleared by reset");
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      prev = r_q;
      chal = {$urandom, $urandom};
      exp = '0;
      exp_o = '0;
      for (int j = 0; j < 2; j++) begin
        exp[j]   = ref_diff(2, S0, chal, W, j) < 0;
        exp_o[j] = ref_diff(2, S1, chal, W, j) < 0;
      end
      #1;
      check(r_q == prev, "response changed before the clock edge");
      @(posedge clk);
      #1;
      check(r_q == exp, $sformatf("chal=%h got %b exp %b", chal, r_q, exp));
      check(r_o == exp_o, $sformatf("chip 2 chal=%h got %b exp %b", chal, r_o, exp_o));
      if (r_q != r_o) differ++;
      for (int j = 0; j < 2; j++) begin
        d = ref_diff(2, S0, chal, W, j);
        if (d > 2 * NOISE || d < -2 * NOISE) begin
          noisy_checked++;
          check(r_n[j] == exp[j], $sformatf("noisy bit %0d chal=%h diff=%0d", j, chal, d));
        end
      end
    end
    check(differ > 150 && differ < 1350, $sformatf("two chips differ on %0d of 1500", differ));
    check(noisy_checked > 1000, "too few reliable challenges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
