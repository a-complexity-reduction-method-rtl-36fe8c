// list_mgmt_unit: list management unit (path metric calculator + sorter).
//
// Holds the L path metrics. For every step it forms the 2L candidate
// metrics (pm_calc) and decides, for each path k, which existing path it
// continues and which bit it appends:
//   STEP_FROZEN  path k keeps itself, appends frozen_val, metric updated for
//                the frozen value; no copy.
//   STEP_EXPAND  path k becomes candidate k, i.e. it copies path floor(k/2)
//                and appends bit k mod 2. No sorting is needed; paths
//                k >= 2*2^gamma_log stay unused.
//   STEP_PRUNE   the two-stage path_sorter picks the L candidates with the
//                smallest metrics and returns them ordered by candidate
//                index; path k becomes survivor k: it copies path
//                floor(i_k/2) and appends bit i_k mod 2.
// Because the survivors are index-ordered, the source of path k is always
// floor(k/2) + sel[k] with sel[k] in 0..L/2, and sel drives the reduced
// (L/2+1)-input crossbars of the memories.
//
// Timing: copy_en, sel, new_bit and surv_idx are combinational from the
// step inputs and the metric registers, to be used at the same clock edge
// that updates the metrics (step_fire). The sorter therefore sits in the
// single-cycle path, as in the reference decoder. best is the active path
// with the smallest metric (lowest index on a tie), from the registers.
// start clears all metrics. Reset is asynchronous, active low.
module list_mgmt_unit
  import scl_pkg::*;
#(
  parameter int unsigned L      = scl_pkg::DEF_L,
  parameter int unsigned Q      = scl_pkg::DEF_Q,
  parameter int unsigned LLR_W  = scl_pkg::DEF_LLR_W,
  parameter int unsigned DESIGN = 3,
  parameter int unsigned PW     = $clog2(2 * L),
  parameter int unsigned SEL_W  = $clog2(L / 2 + 1),
  parameter int unsigned GW     = $clog2(L) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             step_fire,
  input  step_e            step,
  input  logic [GW-1:0]    gamma_log,
  input  logic             frozen_val,
  input  logic [LLR_W-1:0] llr      [L],
  output logic [Q-1:0]     pm       [L],
  output logic             copy_en,
  output logic [SEL_W-1:0] sel      [L],
  output logic             new_bit  [L],
  output logic [PW-1:0]    surv_idx [L],
  output logic [$clog2(L)-1:0] best
);

  logic [Q-1:0]  m_cand    [2*L];
  logic [Q-1:0]  pm_frozen [L];
  logic [PW-1:0] i_cand    [2*L];
  logic [Q-1:0]  m_out     [L];
  logic [PW-1:0] i_out     [L];

  pm_calc #(.L(L), .Q(Q), .LLR_W(LLR_W)) u_pm_calc (
    .pm_in(pm), .llr(llr), .frozen_val(frozen_val),
    .m_cand(m_cand), .pm_frozen(pm_frozen));

  always_comb begin
    for (int c = 0; c < 2 * L; c++) i_cand[c] = PW'(c);
  end

  path_sorter #(.L(L), .Q(Q), .PW(PW), .DESIGN(DESIGN)) u_sorter (
    .m_in(m_cand), .i_in(i_cand), .m_out(m_out), .i_out(i_out));

  // Survivor of each path and its crossbar select.
  always_comb begin
    copy_en = (step != STEP_FROZEN);
    for (int k = 0; k < L; k++) begin
      logic [PW-1:0] c;
      c = (step == STEP_PRUNE) ? i_out[k] : PW'(k);
      surv_idx[k] = c;
      new_bit[k]  = (step == STEP_FROZEN) ? frozen_val : c[0];
      sel[k]      = SEL_W'((c >> 1) - PW'(xbar_lo(k)));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < L; k++) pm[k] <= '0;
    end else if (start) begin
      for (int k = 0; k < L; k++) pm[k] <= '0;
    end else if (step_fire) begin
      for (int k = 0; k < L; k++) begin
        unique case (step)
          STEP_FROZEN: pm[k] <= pm_frozen[k];
          STEP_EXPAND: pm[k] <= m_cand[k];
          default:     pm[k] <= m_out[k];
        endcase
      end
    end
  end

  // Best active path: smallest metric among the first 2^gamma_log paths.
  always_comb begin
    logic [Q-1:0] bm;
    best = '0;
    bm   = pm[0];
    for (int k = 1; k < L; k++) begin
      if ((k < (1 << gamma_log)) && (pm[k] < bm)) begin
        bm   = pm[k];
        best = ($clog2(L))'(k);
      end
    end
  end

  // The property the reduced crossbars rely on: while pruning, survivor
  // indexes are strictly increasing.
  for (genvar k = 1; k < L; k++) begin : g_order_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      (step_fire && step == STEP_PRUNE) |-> (i_out[k-1] < i_out[k]));
  end

endmodule
