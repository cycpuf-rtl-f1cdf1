// tb_metrics_4x4: functional metrics of weak 4-bit-challenge, 4-bit-response
// PUFs, acyclic against cyclic, for all three categories.
//
// Eight chips (eight delay seeds) each carry the six PUFs; the cyclic ones
// share one feedback design (2 paths). Every one of the 16 challenges is
// held for C = 64 cycles after a reset and each response bit is reduced to
// its average bit value ABV = (cycles at 1) / C, read as 1 when ABV >= 0.5.
// From these ABV responses the testbench computes
//   uniqueness  = mean over chip pairs of HD/n           (ideal 50 %)
//   uniformity  = mean over responses of HW/n            (ideal 50 %)
//   reliability = 1 - mean HD/n between a first run and 4 repeats with
//                 fresh noise                            (ideal 100 %)
// and prints them. Checks: every acyclic response whose delay difference is
// beyond the jitter matches the reference model, every cyclic PUF leaves the
// challenge at least once, and the metrics lie in sane ranges (uniqueness
// and uniformity 15..85 %, reliability above 80 %).
module tb_metrics_4x4;
  import cycpuf_pkg::*;
  import cycpuf_ref_pkg::*;

  localparam int K = 8, W = 4, RW = 4, NFB = 2, C = 64, REPS = 5, NOISE = 2;
  localparam string NAME[3][2] = '{'{"APUF", "CycAPUF"}, '{"ROPUF", "CycROPUF"},
                                   '{"BPUF", "CycBPUF"}};

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] chal;
  logic [RW-1:0] resp[K][3][2];
  logic [W-1:0]  ceff[K][3][2];

  for (genvar k = 0; k < K; k++) begin : g_chip
    for (genvar c = 0; c < 3; c++) begin : g_cat
      for (genvar f = 0; f < 2; f++) begin : g_form
        cycpuf #(
          .CATEGORY(puf_category_e'(c)), .CHAL_W(W), .RESP_W(RW), .NFB(f * NFB),
          .PUF_SEED(32'h5000_0000 + 32'(k * 16 + c)), .FB_SEED(32'h0000_0e00 + 32'(c)),
          .NOISE_PS(NOISE), .NOISE_SEED(32'h0600_0000 + 32'(k * 16 + c * 2 + f))
        ) u_puf (
          .clk(clk), .rst_n(rst_n), .chal(chal), .resp(resp[k][c][f]), .chal_eff(ceff[k][c][f]));
      end
    end
  end

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (REPS * 16 * (C + 4) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit [RW-1:0] abv_r[REPS][16][K][3][2];
  int ones[K][3][2][RW];
  int fb_seen[3];

  initial begin
    int d;
    real uq, uf, rl;
    int pairs;
    for (int c = 0; c < 3; c++) fb_seen[c] = 0;
    chal = '0;
    for (int rep = 0; rep < REPS; rep++) begin
      for (int ch = 0; ch < 16; ch++) begin
        rst_n = 0;
        chal = W'(ch);
        foreach (ones[k, c, f, j]) ones[k][c][f][j] = 0;
        #2;
        @(negedge clk) rst_n = 1;
        for (int n = 0; n < C; n++) begin
          @(negedge clk);
          for (int k = 0; k < K; k++)
            for (int c = 0; c < 3; c++)
              for (int f = 0; f < 2; f++) begin
                for (int j = 0; j < RW; j++) ones[k][c][f][j] += int'(resp[k][c][f][j]);
                if (f == 1 && ceff[k][c][f] != chal) fb_seen[c]++;
              end
        end
        for (int k = 0; k < K; k++)
          for (int c = 0; c < 3; c++)
            for (int f = 0; f < 2; f++)
              for (int j = 0; j < RW; j++) begin
                abv_r[rep][ch][k][c][f][j] = (2 * ones[k][c][f][j] >= C);
                if (f == 0) begin
                  d = ref_diff(c, 32'h5000_0000 + 32'(k * 16 + c), 64'(ch), W, j);
                  if (d > 2 * NOISE || d < -2 * NOISE)
                    check(abv_r[rep][ch][k][c][f][j] == (d < 0),
                          $sformatf("%s chip %0d chal %0d bit %0d", NAME[c][0], k, ch, j));
                end
              end
      end
    end
    for (int c = 0; c < 3; c++) begin
      check(fb_seen[c] > 0, $sformatf("%s feedback never active", NAME[c][1]));
      for (int f = 0; f < 2; f++) begin
        uq = 0.0;
        pairs = 0;
        for (int a = 0; a < K - 1; a++)
          for (int b = a + 1; b < K; b++) begin
            for (int ch = 0; ch < 16; ch++)
              uq += real'($countones(abv_r[0][ch][a][c][f] ^ abv_r[0][ch][b][c][f])) / RW;
            pairs++;
          end
        uq = 100.0 * uq / (pairs * 16);
        uf = 0.0;
        for (int k = 0; k < K; k++)
          for (int ch = 0; ch < 16; ch++) uf += real'($countones(abv_r[0][ch][k][c][f])) / RW;
        uf = 100.0 * uf / (K * 16);
        rl = 0.0;
        for (int rep = 1; rep < REPS; rep++)
          for (int k = 0; k < K; k++)
            for (int ch = 0; ch < 16; ch++)
              rl += real'($countones(abv_r[0][ch][k][c][f] ^ abv_r[rep][ch][k][c][f])) / RW;
        rl = 100.0 * (1.0 - rl / ((REPS - 1) * K * 16));
        $display("%-9s uniqueness %6.2f %%  uniformity %6.2f %%  reliability %6.2f %%",
                 NAME[c][f], uq, uf, rl);
        check(uq > 15.0 && uq < 85.0, $sformatf("%s uniqueness out of range", NAME[c][f]));
        check(uf > 15.0 && uf < 85.0, $sformatf("%s uniformity out of range", NAME[c][f]));
        check(rl > 80.0, $sformatf("%s reliability too low", NAME[c][f]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
