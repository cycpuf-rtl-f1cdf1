// tb_faulty_cycpuf: the strong CycPUFs with injected faults, next to the
// fault-free ones.
//
// For each category a fault-free and a faulty CycPUF (64-bit challenge, one
// response bit, 4 / 16 / 12 feedback paths, the same chip) are assembled
// from cyc_feedback and the core, with a fault layer on the effective-
// challenge nets between them. The faulty copies carry 2 (APUF), 11 (ROPUF)
// and 7 (BPUF) faults, cycling through stuck-at-0, stuck-at-1 and bit flip,
// on nets chosen at random with a fixed seed. For 200 random challenges held
// 64 cycles each, every effective challenge and every response beyond the
// jitter is checked against the reference model with the same faults, and
// each held challenge is sorted into the four response modes (rules as in
// tb_cycpuf_top). Required: at least one fault of each kind across the three
// PUFs, and each faulty PUF answering differently from its fault-free twin
// on some challenge.
module tb_faulty_cycpuf;
  import cycpuf_pkg::*;
  import cycpuf_ref_pkg::*;

  localparam int W = 64, HOLD = 64, NCHAL = 200, NOISE = 2;
  localparam int        NFB    [3] = '{4, 16, 12};
  localparam int        NFAULT [3] = '{2, 11, 7};
  localparam bit [31:0] FS     [3] = '{32'h0000_f0a1, 32'h0000_f0b1, 32'h0000_f0c1};
  localparam bit [31:0] PS     [3] = '{32'h00a0_0001, 32'h00b0_0002, 32'h00c0_0003};
  localparam string     NAME   [3] = '{"CycAPUF", "CycROPUF", "CycBPUF"};

  int checks = 0, failures = 0;
  int n_mode[3][2][4];  // [puf][fault-free, faulty][mode]
  int n_kind[3];        // stuck-at-0, stuck-at-1, bit flip
  int n_diff[3];

  // Fault masks per PUF: sa0 forces 0, sa1 forces 1, flp inverts.
  logic [W-1:0] sa0[3], sa1[3], flp[3];

  logic clk = 0, rst_n = 0;
  logic [W-1:0] chal;
  logic [0:0]   r[3][2];
  logic [W-1:0] e[3][2], e_core[3][2];

  for (genvar p = 0; p < 3; p++) begin : g_puf
    for (genvar f = 0; f < 2; f++) begin : g_form
      cyc_feedback #(.CHAL_W(W), .RESP_W(1), .NFB(NFB[p]), .FB_SEED(FS[p])) u_fb (
        .chal(chal), .resp(r[p][f]), .chal_eff(e[p][f]));
      assign e_core[p][f] = (f == 0) ? e[p][f] : (((e[p][f] & ~sa0[p]) | sa1[p]) ^ flp[p]);
      if (p == 0) begin : g_a
        apuf_core #(.CHAL_W(W), .RESP_W(1), .SEED(PS[p]), .NOISE_PS(NOISE),
                    .NOISE_SEED(32'h0dd0_0000 + 32'(2 * p + f))) u_core (
          .clk(clk), .rst_n(rst_n), .chal(e_core[p][f]), .resp(r[p][f]));
      end else if (p == 1) begin : g_r
        ropuf_core #(.CHAL_W(W), .RESP_W(1), .SEED(PS[p]), .NOISE_PS(NOISE),
                     .NOISE_SEED(32'h0dd0_0000 + 32'(2 * p + f))) u_core (
          .clk(clk), .rst_n(rst_n), .chal(e_core[p][f]), .resp(r[p][f]));
      end else begin : g_b
        bpuf_core #(.CHAL_W(W), .RESP_W(1), .SEED(PS[p]), .NOISE_PS(NOISE),
                    .NOISE_SEED(32'h0dd0_0000 + 32'(2 * p + f))) u_core (
          .clk(clk), .rst_n(rst_n), .chal(e_core[p][f]), .resp(r[p][f]));
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
    for (int q = 2; q <= 8; q++) begin
      periodic = 1;
      for (int n = HOLD - 31 + q; n <= HOLD; n++) if (s[n] != s[n-q]) periodic = 0;
      if (periodic) return 2;
    end
    return 3;
  endfunction

  initial begin
    bit s[3][2][HOLD+1];
    bit rp[3][2];
    bit [63:0] ex, ec;
    int d, pos, kind, attempt;
    bit [31:0] h;
    kind = 0;
    for (int k = 0; k < 3; k++) n_kind[k] = 0;
    for (int p = 0; p < 3; p++) begin
      sa0[p] = '0;
      sa1[p] = '0;
      flp[p] = '0;
      n_diff[p] = 0;
      for (int f = 0; f < 2; f++) for (int m = 0; m < 4; m++) n_mode[p][f][m] = 0;
      for (int k = 0; k < NFAULT[p]; k++) begin
        attempt = 0;
        do begin
          h = ref_h(32'hfa17, 32'(p), 32'(k * 1000 + attempt));
          pos = int'(h % W);
          attempt++;
        end while (sa0[p][pos] | sa1[p][pos] | flp[p][pos]);
        case (kind % 3)
          0: sa0[p][pos] = 1'b1;
          1: sa1[p][pos] = 1'b1;
          default: flp[p][pos] = 1'b1;
        endcase
        n_kind[kind % 3]++;
        kind++;
      end
    end
    chal = '0;
    for (int t = 0; t < NCHAL; t++) begin
      rst_n = 0;
      chal = {$urandom, $urandom};
      #2;
      for (int p = 0; p < 3; p++) for (int f = 0; f < 2; f++) begin
        rp[p][f] = 0;
        s[p][f][0] = 0;
      end
      @(negedge clk) rst_n = 1;
      for (int n = 1; n <= HOLD; n++) begin
        @(negedge clk);
        for (int p = 0; p < 3; p++) for (int f = 0; f < 2; f++) begin
          ex = ref_chal_eff(FS[p], chal, 64'(rp[p][f]), W, 1, NFB[p]);
          ec = (f == 0) ? ex : (((ex & ~64'(sa0[p])) | 64'(sa1[p])) ^ 64'(flp[p]));
          d = ref_diff(p, PS[p], ec, W, 0);
          if (d > 2 * NOISE || d < -2 * NOISE)
            check(r[p][f][0] == (d < 0), $sformatf("%s %s cycle %0d", NAME[p],
                                                    f ? "faulty" : "fault-free", n));
          rp[p][f] = r[p][f][0];
          s[p][f][n] = rp[p][f];
          ex = ref_chal_eff(FS[p], chal, 64'(rp[p][f]), W, 1, NFB[p]);
          check(e[p][f] == ex[W-1:0], $sformatf("%s feedback output", NAME[p]));
        end
      end
      for (int p = 0; p < 3; p++) begin
        for (int f = 0; f < 2; f++) n_mode[p][f][classify(s[p][f])]++;
        if (s[p][0][HOLD] != s[p][1][HOLD]) n_diff[p]++;
      end
    end
    for (int p = 0; p < 3; p++) begin
      for (int f = 0; f < 2; f++)
        $display("%s %-10s binary %0d steady-state %0d oscillating %0d pseudo-random %0d",
                 NAME[p], f ? "faulty" : "fault-free", n_mode[p][f][0], n_mode[p][f][1],
                 n_mode[p][f][2], n_mode[p][f][3]);
      check(n_diff[p] > 0, $sformatf("%s: faults changed no response", NAME[p]));
    end
    for (int k = 0; k < 3; k++) check(n_kind[k] > 0, "a fault kind was never injected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
