// tb_list_mgmt_unit: self-checking test of the list management unit.
//
// L = 8, Q = 10. Two instances, sorter Design 3 and Design 1, get the same
// stimulus: a start, then a random sequence of steps as the controller
// would issue them (frozen bits anywhere, log2 L expand steps, then
// prunes), with random LLRs and occasional idle cycles. Metrics are kept
// small so equal metrics occur. The reference keeps its own metrics, picks
// the L best candidates by (metric, index), orders them by index, and
// derives the parent, select and new bit of every path. Checked in every
// step: survivors, selects, new bits, copy flag; after every cycle: the
// metrics and the best active path. Watchdog included.
module tb_list_mgmt_unit;
  import scl_pkg::*;
  localparam int L = 8, Q = 10, LW = 6, NV = 800;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_prune = 0, n_expand = 0, n_frozen = 0;

  logic        rst_n, start, step_fire, frozen_val;
  step_e       step;
  logic [3:0]  gamma_log;
  logic [LW-1:0] llr [L];
  logic [Q-1:0] pm [2][L];
  logic        copy_en [2];
  logic [2:0]  sel [2][L];
  logic        new_bit [2][L];
  logic [3:0]  surv_idx [2][L];
  logic [2:0]  best [2];

  list_mgmt_unit #(.L(L), .Q(Q), .LLR_W(LW), .DESIGN(3)) dut3 (
    .clk, .rst_n, .start, .step_fire, .step, .gamma_log, .frozen_val, .llr,
    .pm(pm[0]), .copy_en(copy_en[0]), .sel(sel[0]), .new_bit(new_bit[0]),
    .surv_idx(surv_idx[0]), .best(best[0]));
  list_mgmt_unit #(.L(L), .Q(Q), .LLR_W(LW), .DESIGN(1)) dut1 (
    .clk, .rst_n, .start, .step_fire, .step, .gamma_log, .frozen_val, .llr,
    .pm(pm[1]), .copy_en(copy_en[1]), .sel(sel[1]), .new_bit(new_bit[1]),
    .surv_idx(surv_idx[1]), .best(best[1]));

  int r_pm [L];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int g;
    rst_n = 0; start = 0; step_fire = 0; frozen_val = 0; step = STEP_FROZEN; gamma_log = '0;
    for (int k = 0; k < L; k++) begin llr[k] = '0; r_pm[k] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < NV; t++) begin
      int cm [2*L], surv [L], nm [L];
      bit taken [2*L];
      if (t % 200 == 0) begin
        start = 1; step_fire = 0;
        @(posedge clk); #1 start = 0;
        g = 0; for (int k = 0; k < L; k++) r_pm[k] = 0;
      end
      step_fire = ($urandom_range(0, 5) != 0);
      gamma_log = 4'(g);
      frozen_val = ($urandom_range(0, 7) == 0);
      if ($urandom_range(0, 3) == 0) step = STEP_FROZEN;
      else if (g < 3) step = STEP_EXPAND;
      else step = STEP_PRUNE;
      for (int k = 0; k < L; k++) llr[k] = {1'($urandom_range(0, 1)), 5'($urandom_range(0, 6))};
      for (int l = 0; l < L; l++) begin
        int mag;
        mag = int'(llr[l][4:0]);
        cm[2*l]   = llr[l][5] ? r_pm[l] + mag : r_pm[l];
        cm[2*l+1] = llr[l][5] ? r_pm[l] : r_pm[l] + mag;
      end
      if (step == STEP_PRUNE) begin
        int s;
        for (int c = 0; c < 2 * L; c++) taken[c] = 0;
        for (int n = 0; n < L; n++) begin
          int b;
          b = -1;
          for (int c = 0; c < 2 * L; c++) if (!taken[c] && (b < 0 || cm[c] < cm[b])) b = c;
          taken[b] = 1;
        end
        s = 0;
        for (int c = 0; c < 2 * L; c++) if (taken[c]) begin surv[s] = c; s++; end
      end else begin
        for (int k = 0; k < L; k++) surv[k] = k;
      end
      for (int k = 0; k < L; k++)
        nm[k] = (step == STEP_FROZEN) ? cm[2*k + int'(frozen_val)] : cm[surv[k]];
      #1;
      for (int d = 0; d < 2; d++) begin
        chk(copy_en[d] == (step != STEP_FROZEN), "copy flag");
        if (step != STEP_FROZEN)
          for (int k = 0; k < L; k++) begin
            chk(int'(surv_idx[d][k]) == surv[k], "survivor");
            chk(int'(sel[d][k]) == surv[k] / 2 - k / 2, "select");
            chk(new_bit[d][k] == 1'(surv[k] % 2), "new bit");
          end
        else
          for (int k = 0; k < L; k++) chk(new_bit[d][k] == frozen_val, "frozen bit");
      end
      @(posedge clk); #1;
      if (step_fire) begin
        r_pm = nm;
        if (step == STEP_EXPAND) begin g++; n_expand++; end
        if (step == STEP_PRUNE) n_prune++;
        if (step == STEP_FROZEN) n_frozen++;
      end
      begin
        int b;
        b = 0;
        for (int k = 1; k < (1 << g); k++) if (r_pm[k] < r_pm[b]) b = k;
        gamma_log = 4'(g);
        #1;
        for (int d = 0; d < 2; d++) begin
          for (int k = 0; k < L; k++) chk(int'(pm[d][k]) == r_pm[k], "metric");
          chk(int'(best[d]) == b, "best path");
        end
      end
    end
    chk(n_prune > 0 && n_expand > 0 && n_frozen > 0, "all step types seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
