// scl_core: list management core of an SCL polar decoder with index-ordered
// survivors and (L/2+1)-input copy crossbars.
//
// The decoder keeps L candidate bit sequences (paths). Each time an
// information bit is decided every path splits into two candidates, and once
// there are L paths the L best of the 2L candidates survive. Their register
// contents must then be copied from the paths they came from. Here the
// survivors leave the sorter ordered by candidate index, so path k can only
// inherit from paths floor(k/2)..floor((L+k)/2), and every copy multiplexer
// has L/2+1 inputs instead of L.
//
// Contents:
//   scl_ctrl        bit counter and step type (frozen / expand / prune)
//   list_mgmt_unit  path metrics, candidate metrics, two-stage sorter
//                   (DESIGN 1..3, default 3), survivor selects
//   path_memory     N decoded bits per path, reduced crossbar
//   u_ps_bank       partial-sum registers, P + N/2 bits per path
//   u_ptr_bank      LLR pointer registers, (log2 N - 1) log2 L bits per path
//
// Not inside: the SC processing elements, the LLR RAM and the partial-sum
// network. They connect through ports: the SC side presents the decision
// LLR of the current bit for every path on llr with llr_valid; the
// partial-sum network and the LLR memory controller read ps_q / ptr_q and
// write ps_wr_* / ptr_wr_* in cycles without a step (a write during a step is
// not allowed). The step's outcome (step_copy, step_sel, step_bit) is
// presented to them in the cycle of the step.
//
// Timing: after a start pulse, one step is taken in every cycle in which
// llr_valid is high, for bits 0..N-1 in order; done pulses the cycle after
// the last one. u_hat then holds the decoded bits of the path with the
// smallest metric (best). Reset is asynchronous, active low.
module scl_core
  import scl_pkg::*;
#(
  parameter int unsigned L      = scl_pkg::DEF_L,
  parameter int unsigned N      = scl_pkg::DEF_N,
  parameter int unsigned P      = scl_pkg::DEF_P,
  parameter int unsigned Q      = scl_pkg::DEF_Q,
  parameter int unsigned LLR_W  = scl_pkg::DEF_LLR_W,
  parameter int unsigned DESIGN = 3,
  parameter int unsigned PS_W   = P + N / 2,
  parameter int unsigned PTR_W  = ($clog2(N) - 1) * $clog2(L),
  parameter int unsigned SEL_W  = $clog2(L / 2 + 1),
  parameter int unsigned IW     = $clog2(N),
  parameter int unsigned LW     = $clog2(L)
) (
  input  logic             clk,
  input  logic             rst_n,
  // codeword control
  input  logic             start,
  input  logic [N-1:0]     frozen_mask,
  input  logic             frozen_val,
  output logic             busy,
  output logic             done,
  output logic [IW-1:0]    bit_idx,
  // from the SC module: decision LLR of bit bit_idx for every path
  input  logic             llr_valid,
  input  logic [LLR_W-1:0] llr       [L],
  // step outcome, for the partial-sum network and LLR memory controller
  output step_e            step_type,
  output logic             step_copy,
  output logic [SEL_W-1:0] step_sel  [L],
  output logic [LW:0]      step_surv [L],
  output logic             step_bit  [L],
  // partial-sum registers
  input  logic             ps_wr_en   [L],
  input  logic [PS_W-1:0]  ps_wr_data [L],
  output logic [PS_W-1:0]  ps_q       [L],
  // LLR pointer registers
  input  logic             ptr_wr_en   [L],
  input  logic [PTR_W-1:0] ptr_wr_data [L],
  output logic [PTR_W-1:0] ptr_q       [L],
  // results
  output logic [Q-1:0]     pm    [L],
  output logic [N-1:0]     paths [L],
  output logic [LW-1:0]    best,
  output logic [N-1:0]     u_hat
);

  localparam int unsigned GW = LW + 1;

  logic          step_fire;
  logic [GW-1:0] gamma_log;
  logic          copy_now;

  scl_ctrl #(.L(L), .N(N), .GW(GW), .IW(IW)) u_ctrl (
    .clk, .rst_n, .start, .frozen_mask, .step_in(llr_valid),
    .busy, .step_fire, .step(step_type), .bit_idx, .gamma_log, .done);

  list_mgmt_unit #(.L(L), .Q(Q), .LLR_W(LLR_W), .DESIGN(DESIGN),
                   .SEL_W(SEL_W), .GW(GW)) u_lmu (
    .clk, .rst_n, .start, .step_fire, .step(step_type), .gamma_log,
    .frozen_val, .llr, .pm, .copy_en(step_copy), .sel(step_sel),
    .new_bit(step_bit), .surv_idx(step_surv), .best);

  assign copy_now = step_fire && step_copy;

  path_memory #(.L(L), .N(N), .SEL_W(SEL_W), .IW(IW)) u_path_mem (
    .clk, .rst_n, .wr_en(step_fire), .bit_idx, .copy_en(step_copy),
    .sel(step_sel), .new_bit(step_bit), .paths);

  path_reg_bank #(.L(L), .W(PS_W), .SEL_W(SEL_W)) u_ps_bank (
    .clk, .rst_n, .copy_en(copy_now), .sel(step_sel),
    .wr_en(ps_wr_en), .wr_data(ps_wr_data), .q(ps_q));

  path_reg_bank #(.L(L), .W(PTR_W), .SEL_W(SEL_W)) u_ptr_bank (
    .clk, .rst_n, .copy_en(copy_now), .sel(step_sel),
    .wr_en(ptr_wr_en), .wr_data(ptr_wr_data), .q(ptr_q));

  assign u_hat = paths[best];

endmodule
