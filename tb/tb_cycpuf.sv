// tb_cycpuf: self-checking testbench of one CycPUF (core plus feedback).
//
// Three noise-free CycPUFs, one per category, with a 16-bit challenge, a
// 4-bit response and 6 feedback paths, plus an acyclic arbiter PUF (no
// feedback paths). Each random challenge is held for 40 cycles after a
// reset. The testbench iterates its own reference of the loop,
//   R(n+1) = PUF(chal ^ F(R(n))),  R(0) = 0,
// and compares every response vector and every effective challenge with it.
// It also sorts each held challenge into a response mode (binary: R never
// leaves R(1); steady state: R changes, then settles; oscillating: R ends in
// a repeating cycle of length 2 or more) and requires the cyclic PUFs to
// show steady-state and oscillating challenges and the acyclic PUF to show
// binary ones only.
module tb_cycpuf;
  import cycpuf_pkg::*;
  import cycpuf_ref_pkg::*;

  localparam int W = 16, RW = 4, NFB = 6, HOLD = 40;
  localparam bit [31:0] PS [3] = '{32'h1111_0001, 32'h2222_0002, 32'h3333_0003};
  localparam bit [31:0] FS [3] = '{32'h0000_0f01, 32'h0000_0f02, 32'h0000_0f03};

  int checks = 0, failures = 0;
  int n_binary[4], n_steady[4], n_osc[4];

  logic clk = 0, rst_n = 0;
  logic [W-1:0]  chal;
  logic [RW-1:0] resp[4];
  logic [W-1:0]  ceff[4];

  cycpuf #(.CATEGORY(PUF_APUF), .CHAL_W(W), .RESP_W(RW), .NFB(NFB), .PUF_SEED(PS[0]),
           .FB_SEED(FS[0]), .NOISE_PS(0)) u_a (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(resp[0]), .chal_eff(ceff[0]));
  cycpuf #(.CATEGORY(PUF_ROPUF), .CHAL_W(W), .RESP_W(RW), .NFB(NFB), .PUF_SEED(PS[1]),
           .FB_SEED(FS[1]), .NOISE_PS(0)) u_r (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(resp[1]), .chal_eff(ceff[1]));
  cycpuf #(.CATEGORY(PUF_BPUF), .CHAL_W(W), .RESP_W(RW), .NFB(NFB), .PUF_SEED(PS[2]),
           .FB_SEED(FS[2]), .NOISE_PS(0)) u_b (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(resp[2]), .chal_eff(ceff[2]));
  cycpuf #(.CATEGORY(PUF_APUF), .CHAL_W(W), .RESP_W(RW), .NFB(0), .PUF_SEED(PS[0]),
           .FB_SEED(FS[0]), .NOISE_PS(0)) u_acyc (
    .clk(clk), .rst_n(rst_n), .chal(chal), .resp(resp[3]), .chal_eff(ceff[3]));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit [RW-1:0] ref_step(int p, bit [W-1:0] c, bit [RW-1:0] r);
    bit [63:0] e;
    bit [RW-1:0] nr;
    int cat;
    int nfb;
    cat = (p == 3) ? 0 : p;
    nfb = (p == 3) ? 0 : NFB;
    e = ref_chal_eff(FS[cat], 64'(c), 64'(r), W, RW, nfb);
    for (int j = 0; j < RW; j++) nr[j] = ref_diff(cat, PS[cat], e, W, j) < 0;
    return nr;
  endfunction

  initial begin
    bit [RW-1:0] model[4];
    bit [RW-1:0] seq[4][HOLD+1];
    bit [63:0] e;
    for (int p = 0; p < 4; p++) begin
      n_binary[p] = 0;
      n_steady[p] = 0;
      n_osc[p] = 0;
    end
    chal = '0;
    for (int t = 0; t < 200; t++) begin
      rst_n = 0;
      chal = W'($urandom);
      #2;
      for (int p = 0; p < 4; p++) begin
        model[p] = '0;
        seq[p][0] = '0;
      end
      @(negedge clk) rst_n = 1;
      for (int n = 1; n <= HOLD; n++) begin
        for (int p = 0; p < 4; p++) begin
          e = ref_chal_eff(FS[p == 3 ? 0 : p], 64'(chal), 64'(model[p]), W, RW,
                           p == 3 ? 0 : NFB);
          check(ceff[p] == e[W-1:0], $sformatf("puf %0d chal_eff %h exp %h", p, ceff[p], e[W-1:0]));
          model[p] = ref_step(p, chal, model[p]);
        end
        @(negedge clk);
        for (int p = 0; p < 4; p++) begin
          check(resp[p] == model[p],
                $sformatf("puf %0d chal %h cycle %0d got %h exp %h", p, chal, n, resp[p], model[p]));
          seq[p][n] = resp[p];
        end
      end
      // Response mode of this held challenge, per PUF.
      for (int p = 0; p < 4; p++) begin
        bit constant, settled;
        constant = 1;
        for (int n = 2; n <= HOLD; n++) if (seq[p][n] != seq[p][1]) constant = 0;
        settled = 1;
        for (int n = HOLD - 20; n <= HOLD; n++) if (seq[p][n] != seq[p][HOLD]) settled = 0;
        if (constant) n_binary[p]++;
        else if (settled) n_steady[p]++;
        else n_osc[p]++;
      end
    end
    for (int p = 0; p < 3; p++) begin
      $display("puf %0d: binary %0d steady %0d oscillating %0d", p, n_binary[p], n_steady[p],
               n_osc[p]);
      check(n_steady[p] > 0, $sformatf("puf %0d never showed the steady-state mode", p));
      check(n_osc[p] > 0, $sformatf("puf %0d never oscillated", p));
    end
    check(n_binary[3] == 200, "acyclic PUF left the binary mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
