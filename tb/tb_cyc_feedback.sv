// tb_cyc_feedback: self-checking testbench of the CycPUF feedback network.
//
// Three instances: the security-evaluation shape (64-bit challenge, one
// response bit, 16 paths), a multi-bit shape (4-bit challenge, 4-bit
// response, 4 paths, every challenge bit driven) and an acyclic one (no
// paths). Random challenge/response pairs are applied and each effective
// challenge is compared with the reference model's. Also checked: the
// number of challenge bits the feedback can flip equals the path count (the
// driven bits are distinct).
module tb_cyc_feedback;
  import cycpuf_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [63:0] c64, e64a, e64n;
  logic [0:0]  r1;
  logic [3:0]  c4, r4, e4;

  cyc_feedback #(.CHAL_W(64), .RESP_W(1), .NFB(16), .FB_SEED(32'h0000_f0b1)) u_a (
    .chal(c64), .resp(r1), .chal_eff(e64a));
  cyc_feedback #(.CHAL_W(4), .RESP_W(4), .NFB(4), .FB_SEED(32'h0000_1234)) u_b (
    .chal(c4), .resp(r4), .chal_eff(e4));
  cyc_feedback #(.CHAL_W(64), .RESP_W(1), .NFB(0)) u_n (
    .chal(c64), .resp(r1), .chal_eff(e64n));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [63:0] exp;
    for (int t = 0; t < 400; t++) begin
      c64 = {$urandom, $urandom};
      r1  = 1'($urandom);
      c4  = 4'($urandom);
      r4  = 4'($urandom);
      #1;
      exp = ref_chal_eff(32'h0000_f0b1, c64, 64'(r1), 64, 1, 16);
      check(e64a == exp, $sformatf("64x1 chal=%h r=%0d got %h exp %h", c64, r1, e64a, exp));
      exp = ref_chal_eff(32'h0000_1234, 64'(c4), 64'(r4), 4, 4, 4);
      check(e4 == exp[3:0], $sformatf("4x4 chal=%h r=%h got %h exp %h", c4, r4, e4, exp[3:0]));
      check(e64n == c64, "acyclic instance altered the challenge");
      if (r1) check($countones(e64a ^ c64) == 16, "64x1: feedback did not flip 16 distinct bits");
      else    check(e64a == c64, "64x1: response 0 must leave the challenge alone");
      if (r4 == 4'hf) check($countones(e4 ^ c4) == 4, "4x4: not all 4 bits flipped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
