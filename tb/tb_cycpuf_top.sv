// tb_cycpuf_top: end-to-end testbench of the three-CycPUF chip at its
// default size (64-bit challenge, one response bit, 4 / 16 / 12 feedback
// paths, 2 ps jitter).
//
// For each of 400 random challenges the chip is reset and the challenge held
// for 64 cycles. Every cycle, for every PUF, the testbench checks the
// effective challenge against its reference of the feedback network and the
// next response against the reference delay model wherever the delay
// difference is larger than the jitter can overturn (2 x 2 ps). Each held
// challenge is then sorted into the paper's four response modes:
//   binary         R(1..64) constant
//   steady state   changes, then constant over the last 32 cycles
//   oscillating    not constant over the last 32 cycles but repeating there
//                  with a period of 2 to 8 cycles
//   pseudo-random  none of these
// Every mode, and the feedback actually changing a challenge, must happen
// at least once; the counts are printed.
module tb_cycpuf_top;
  import cycpuf_ref_pkg::*;

  localparam int W = 64, HOLD = 64, NCHAL = 400, NOISE = 2;
  localparam bit [31:0] CHIP = 32'h0c1c_0001;
  localparam int        NFB [3] = '{4, 16, 12};
  localparam bit [31:0] FS  [3] = '{32'h0000_f0a1, 32'h0000_f0b1, 32'h0000_f0c1};
  localparam bit [31:0] PK  [3] = '{32'h0000_0a01, 32'h0000_0b01, 32'h0000_0c01};
  localparam string     NAME[3] = '{"CycAPUF", "CycROPUF", "CycBPUF"};

  int checks = 0, failures = 0;
  int n_mode[3][4];  // [puf][binary, steady, oscillating, pseudo-random]
  int n_fb_active[3];

  logic clk = 0, rst_n = 0;
  logic [W-1:0] chal;
  logic [0:0] r_a, r_r, r_b;
  logic [W-1:0] e_a, e_r, e_b;

  cycpuf_top dut (
    .clk(clk), .rst_n(rst_n), .chal(chal),
    .resp_apuf(r_a), .resp_ropuf(r_r), .resp_bpuf(r_b),
    .chal_eff_apuf(e_a), .chal_eff_ropuf(e_r), .chal_eff_bpuf(e_b));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (NCHAL * (HOLD + 4) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int classify(bit s[HOLD+1]);
    bit constant, settled, periodic;
    constant = 1;
    for (int n = 2; n <= HOLD; n++) if (s[n] != s[1]) constant = 0;
    if (constant) return 0;
    settled = 1;
    for (int n = HOLD - 31; n <= HOLD; n++) if (s[n] != s[HOLD]) settled = 0;
    if (settled) return 1;
    for (int p = 2; p <= 8; p++) begin
      periodic = 1;
      for (int n = HOLD - 31 + p; n <= HOLD; n++) if (s[n] != s[n-p]) periodic = 0;
      if (periodic) return 2;
    end
    return 3;
  endfunction

  initial begin
    bit [31:0] ps[3];
    bit s[3][HOLD+1];
    bit [63:0] e, got_e;
    bit r_prev[3], r_now[3];
    int d;
    for (int p = 0; p < 3; p++) begin
      ps[p] = ref_m(CHIP ^ PK[p]);
      n_fb_active[p] = 0;
      for (int m = 0; m < 4; m++) n_mode[p][m] = 0;
    end
    chal = '0;
    for (int t = 0; t < NCHAL; t++) begin
      rst_n = 0;
      chal = {$urandom, $urandom};
      #2;
      for (int p = 0; p < 3; p++) begin
        r_prev[p] = 0;
        s[p][0] = 0;
      end
      @(negedge clk) rst_n = 1;
      for (int n = 1; n <= HOLD; n++) begin
        for (int p = 0; p < 3; p++) begin
          got_e = (p == 0) ? e_a : (p == 1) ? e_r : e_b;
          e = ref_chal_eff(FS[p], chal, 64'(r_prev[p]), W, 1, NFB[p]);
          check(got_e == e, $sformatf("%s chal_eff %h exp %h", NAME[p], got_e, e));
          if (got_e != chal) n_fb_active[p]++;
        end
        @(negedge clk);
        r_now[0] = r_a[0];
        r_now[1] = r_r[0];
        r_now[2] = r_b[0];
        for (int p = 0; p < 3; p++) begin
          d = ref_diff(p, ps[p], e_ref(p, r_prev[p]), W, 0);
          if (d > 2 * NOISE || d < -2 * NOISE)
            check(r_now[p] == (d < 0), $sformatf("%s cycle %0d diff %0d got %0d", NAME[p], n,
                                                  d, r_now[p]));
          s[p][n] = r_now[p];
          r_prev[p] = r_now[p];
        end
      end
      for (int p = 0; p < 3; p++) n_mode[p][classify(s[p])]++;
    end
    for (int p = 0; p < 3; p++)
      $display("%s: binary %0d steady-state %0d oscillating %0d pseudo-random %0d, feedback active in %0d cycles",
               NAME[p], n_mode[p][0], n_mode[p][1], n_mode[p][2], n_mode[p][3], n_fb_active[p]);
    for (int m = 0; m < 4; m++)
      check(n_mode[0][m] + n_mode[1][m] + n_mode[2][m] > 0, $sformatf("response mode %0d never seen", m));
    for (int p = 0; p < 3; p++) check(n_fb_active[p] > 0, $sformatf("%s feedback never active", NAME[p]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Effective challenge the reference feeds the core, given the last response.
  function automatic bit [63:0] e_ref(int p, bit r);
    return ref_chal_eff(FS[p], chal, 64'(r), W, 1, NFB[p]);
  endfunction
endmodule
