// tb_pm_calc: self-checking test of the path metric calculator.
//
// L = 8, Q = 10, 6-bit sign-magnitude LLRs. Random metrics (including
// values near 2^Q-1 to reach saturation) and LLRs, both frozen values.
// Expected values come from integer arithmetic in the testbench:
// candidate 2l+u gets pm + |llr| when u differs from the hard decision
// (1 for a negative LLR), capped at 2^Q-1. Watchdog included.
module tb_pm_calc;
  localparam int L = 8, Q = 10, LW = 6, NV = 500;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, sat_seen = 0;

  logic [Q-1:0]  pm_in [L], m_cand [2*L], pm_frozen [L];
  logic [LW-1:0] llr [L];
  logic          frozen_val;

  pm_calc #(.L(L), .Q(Q), .LLR_W(LW)) dut (
    .pm_in, .llr, .frozen_val, .m_cand, .pm_frozen);

  initial begin
    for (int t = 0; t < NV; t++) begin
      int p [L], s [L], mg [L], e0, e1;
      frozen_val = 1'($urandom_range(0, 1));
      for (int l = 0; l < L; l++) begin
        p[l]  = (t % 4 == 0) ? $urandom_range(1000, 1023) : $urandom_range(0, 900);
        s[l]  = $urandom_range(0, 1);
        mg[l] = $urandom_range(0, 31);
        pm_in[l] = Q'(p[l]);
        llr[l]   = {1'(s[l]), 5'(mg[l])};
      end
      @(posedge clk); #1;
      for (int l = 0; l < L; l++) begin
        e0 = p[l] + (s[l] == 1 ? mg[l] : 0);
        e1 = p[l] + (s[l] == 0 ? mg[l] : 0);
        if (e0 > 1023 || e1 > 1023) sat_seen++;
        if (e0 > 1023) e0 = 1023;
        if (e1 > 1023) e1 = 1023;
        checks += 3;
        if (int'(m_cand[2*l]) != e0) failures++;
        if (int'(m_cand[2*l+1]) != e1) failures++;
        if (int'(pm_frozen[l]) != (frozen_val ? e1 : e0)) failures++;
      end
    end
    checks++;
    if (sat_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV * 2 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
