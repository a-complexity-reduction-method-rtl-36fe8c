// tb_scl_core_l4: end-to-end test of the SCL list management core in its
// L = 4 configuration (N = 4096, P = 32, sorter Design 3), the smaller of
// the two list sizes of the reference decoder comparison.
//
// Same procedure as tb_scl_core: one codeword with a random frozen set,
// random decision LLRs one bit per cycle, random partial-sum and pointer
// writes in idle cycles, and a conventional list decoder model with full
// L-way copying as reference. Metrics, all decoded-bit, partial-sum and
// pointer registers and the step outputs are compared after every cycle;
// done must come exactly after N steps. Each mechanism (frozen, expand,
// prune, copy from another path, killed and duplicated paths, top-of-window
// select, register writes) must occur at least once. Watchdog included.
module tb_scl_core_l4;
  import scl_pkg::*;
  localparam int L = 4, N = DEF_N, P = DEF_P, Q = DEF_Q, LW = DEF_LLR_W;
  localparam int PS_W = P + N / 2, PTR_W = ($clog2(N) - 1) * $clog2(L);
  localparam int SEL_W = $clog2(L / 2 + 1), IW = $clog2(N), LGL = $clog2(L);

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             rst_n, start, frozen_val, busy, done, llr_valid;
  logic [N-1:0]     frozen_mask;
  logic [IW-1:0]    bit_idx;
  logic [LW-1:0]    llr [L];
  step_e            step_type;
  logic             step_copy;
  logic [SEL_W-1:0] step_sel [L];
  logic [LGL:0]     step_surv [L];
  logic             step_bit [L];
  logic             ps_wr_en [L], ptr_wr_en [L];
  logic [PS_W-1:0]  ps_wr_data [L], ps_q [L];
  logic [PTR_W-1:0] ptr_wr_data [L], ptr_q [L];
  logic [Q-1:0]     pm [L];
  logic [N-1:0]     paths [L];
  logic [LGL-1:0]   best;
  logic [N-1:0]     u_hat;

  scl_core #(.L(L), .N(N), .P(P), .Q(Q), .LLR_W(LW), .DESIGN(3)) dut (.*);

  // Reference state.
  int           r_pm [L];
  logic [N-1:0] r_paths [L];
  logic [PS_W-1:0]  r_ps [L];
  logic [PTR_W-1:0] r_ptr [L];
  int           r_gamma_log;

  // Mechanism counters.
  int n_frozen = 0, n_expand = 0, n_prune = 0, n_moved = 0, n_killed = 0;
  int n_dup = 0, n_top_sel = 0, n_ps_wr = 0, n_ptr_wr = 0, n_done = 0;

  function automatic int sat(input int v);
    return (v > (1 << Q) - 1) ? (1 << Q) - 1 : v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s at bit %0d", what, bit_idx);
    end
  endtask

  // One decision step of the reference model; also checks the step outputs.
  task automatic ref_step(input int i);
    int cm [2*L], surv [L], src [L], cnt [L];
    bit taken [2*L];
    logic [N-1:0]     np [L];
    logic [PS_W-1:0]  nps [L];
    logic [PTR_W-1:0] nptr [L];
    int nm [L];
    for (int l = 0; l < L; l++) begin
      int neg, mag;
      neg = llr[l][LW-1];
      mag = llr[l][LW-2:0];
      cm[2*l]   = neg ? sat(r_pm[l] + mag) : r_pm[l];
      cm[2*l+1] = neg ? r_pm[l] : sat(r_pm[l] + mag);
    end
    if (frozen_mask[i]) begin
      n_frozen++;
      check(step_type == STEP_FROZEN && !step_copy, "step type frozen");
      for (int l = 0; l < L; l++) begin
        r_pm[l] = cm[2*l + int'(frozen_val)];
        r_paths[l][i] = frozen_val;
      end
      return;
    end
    if (r_gamma_log < LGL) begin
      n_expand++;
      check(step_type == STEP_EXPAND, "step type expand");
      for (int k = 0; k < L; k++) surv[k] = k;
      r_gamma_log++;
    end else begin
      int s;
      n_prune++;
      check(step_type == STEP_PRUNE, "step type prune");
      for (int c = 0; c < 2 * L; c++) taken[c] = 0;
      for (int n = 0; n < L; n++) begin
        int b;
        b = -1;
        for (int c = 0; c < 2 * L; c++)
          if (!taken[c] && (b < 0 || cm[c] < cm[b])) b = c;
        taken[b] = 1;
      end
      s = 0;
      for (int c = 0; c < 2 * L; c++) if (taken[c]) begin surv[s] = c; s++; end
    end
    for (int l = 0; l < L; l++) cnt[l] = 0;
    for (int k = 0; k < L; k++) begin
      src[k] = surv[k] / 2;
      cnt[src[k]]++;
      check(int'(step_surv[k]) == surv[k], "survivor index");
      check(int'(step_sel[k]) == src[k] - k / 2, "crossbar select");
      check(step_bit[k] == 1'(surv[k] % 2), "new bit");
      if (src[k] != k) n_moved++;
      if (src[k] - k / 2 == L / 2) n_top_sel++;
      // Conventional copy: full L-way selection by parent index.
      np[k]   = r_paths[src[k]];
      nps[k]  = r_ps[src[k]];
      nptr[k] = r_ptr[src[k]];
      np[k][i] = 1'(surv[k] % 2);
      nm[k] = cm[surv[k]];
    end
    if (step_type == STEP_PRUNE)
      for (int l = 0; l < L; l++) begin
        if (cnt[l] == 0) n_killed++;
        if (cnt[l] == 2) n_dup++;
      end
    for (int k = 0; k < L; k++) begin
      r_paths[k] = np[k]; r_ps[k] = nps[k]; r_ptr[k] = nptr[k]; r_pm[k] = nm[k];
    end
  endtask

  task automatic compare_state();
    for (int k = 0; k < L; k++) begin
      check(int'(pm[k]) == r_pm[k], "path metric");
      check(paths[k] == r_paths[k], "path memory");
      check(ps_q[k] == r_ps[k], "partial-sum register");
      check(ptr_q[k] == r_ptr[k], "pointer register");
    end
  endtask

  initial begin
    int steps, cycles, done_at;
    rst_n = 0; start = 0; llr_valid = 0; frozen_val = 0;
    for (int k = 0; k < L; k++) begin
      llr[k] = '0; ps_wr_en[k] = 0; ptr_wr_en[k] = 0;
      ps_wr_data[k] = '0; ptr_wr_data[k] = '0;
      r_pm[k] = 0; r_paths[k] = '0; r_ps[k] = '0; r_ptr[k] = '0;
    end
    for (int i = 0; i < N; i++) frozen_mask[i] = ($urandom_range(0, 99) < 50);
    for (int i = 0; i < 4; i++) frozen_mask[i] = 1'b1;  // a frozen prefix
    r_gamma_log = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    steps = 0; cycles = 0; done_at = -1;
    for (int i = 0; i < N; i++) begin
      // Decision cycle.
      llr_valid  = 1;
      frozen_val = (frozen_mask[i] && $urandom_range(0, 9) == 0);
      for (int k = 0; k < L; k++) begin
        bit neg;
        neg = frozen_mask[i] ? ($urandom_range(0, 9) == 0) : 1'($urandom_range(0, 1));
        llr[k] = {neg, 5'($urandom_range(0, 31))};
      end
      #1;
      check(busy && int'(bit_idx) == i, "bit index");
      ref_step(i);
      @(posedge clk); #1;
      steps++;
      llr_valid = 0;
      if (done) begin n_done++; done_at = steps; end
      compare_state();
      // Idle cycle with register writes after every third bit.
      if (i % 3 == 2 && i != N - 1) begin
        for (int k = 0; k < L; k++) begin
          ps_wr_en[k]  = ($urandom_range(0, 1) == 1);
          ptr_wr_en[k] = ($urandom_range(0, 1) == 1);
          for (int w = 0; w < PS_W; w += 32) ps_wr_data[k][w +: 32] = $urandom;
          ptr_wr_data[k] = {$urandom, $urandom};
          if (ps_wr_en[k])  begin r_ps[k]  = ps_wr_data[k];  n_ps_wr++;  end
          if (ptr_wr_en[k]) begin r_ptr[k] = ptr_wr_data[k]; n_ptr_wr++; end
        end
        @(posedge clk); #1;
        for (int k = 0; k < L; k++) begin ps_wr_en[k] = 0; ptr_wr_en[k] = 0; end
        compare_state();
      end
    end
    // done must pulse right after the N-th step: one cycle per bit.
    check(n_done == 1 && done_at == N, "done after N steps");
    check(!busy, "idle after codeword");
    begin
      int b;
      b = 0;
      for (int k = 1; k < L; k++) if (r_pm[k] < r_pm[b]) b = k;
      check(int'(best) == b, "best path");
      check(u_hat == r_paths[b], "decoded word");
    end
    $display("mechanisms: frozen=%0d expand=%0d prune=%0d moved=%0d killed=%0d dup=%0d top_sel=%0d ps_wr=%0d ptr_wr=%0d",
             n_frozen, n_expand, n_prune, n_moved, n_killed, n_dup, n_top_sel, n_ps_wr, n_ptr_wr);
    check(n_frozen > 0, "frozen step seen");
    check(n_expand == LGL, "expand steps seen");
    check(n_prune > 0, "prune step seen");
    check(n_moved > 0, "copy from other path seen");
    check(n_killed > 0, "killed path seen");
    check(n_dup > 0, "duplicated path seen");
    check(n_top_sel > 0, "top-of-window select seen");
    check(n_ps_wr > 0 && n_ptr_wr > 0, "register writes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * N + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
