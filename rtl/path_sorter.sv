// path_sorter: the two-stage survivor sorter.
//
// Inputs are the path metrics m_in and the candidate indexes i_in of the 2L
// candidate paths; outputs are the metrics m_out and indexes i_out of the L
// surviving paths, q and p bits wide. The first stage (metric sorter, 2L
// inputs) finds the L candidates with the smallest metrics. The second stage
// (index sorter, L inputs) puts those survivors in ascending order of
// candidate index, so that i_out[0] < i_out[1] < ... < i_out[L-1]. That
// order is what lets each path's copy multiplexer have L/2+1 inputs instead
// of L.
//
// DESIGN selects the stage implementations of the sorter design table:
//   1: MVF metric stage, bitonic index stage (lowest area, longest delay)
//   2: MVF metric stage, radix-L index stage
//   3: radix-2L metric stage, radix-L index stage (shortest delay)
// Design 3 is the default because it is the one used in the reference
// decoder. Ties in metric are resolved towards the smaller candidate index
// in every design, so all three give the same survivors. The sorter is
// combinational; the caller registers its outputs.
module path_sorter #(
  parameter int unsigned L      = scl_pkg::DEF_L,
  parameter int unsigned Q      = scl_pkg::DEF_Q,
  parameter int unsigned PW     = $clog2(2 * L),
  parameter int unsigned DESIGN = 3
) (
  input  logic [Q-1:0]  m_in  [2*L],
  input  logic [PW-1:0] i_in  [2*L],
  output logic [Q-1:0]  m_out [L],
  output logic [PW-1:0] i_out [L]
);

  logic [Q-1:0]  m_surv [L];  // survivors after the metric stage
  logic [PW-1:0] i_surv [L];

  if (DESIGN == 3) begin : g_metric_radix
    radix_sorter #(.NIN(2 * L), .NOUT(L), .KEY_W(Q), .TAG_W(PW)) u_metric (
      .key_in(m_in), .tag_in(i_in), .key_out(m_surv), .tag_out(i_surv));
  end else begin : g_metric_mvf
    mvf_sorter #(.NIN(2 * L), .KEY_W(Q), .TAG_W(PW)) u_metric (
      .key_in(m_in), .tag_in(i_in), .key_out(m_surv), .tag_out(i_surv));
  end

  if (DESIGN == 1) begin : g_index_bitonic
    bitonic_sorter #(.NIN(L), .KEY_W(PW), .TAG_W(Q)) u_index (
      .key_in(i_surv), .tag_in(m_surv), .key_out(i_out), .tag_out(m_out));
  end else begin : g_index_radix
    radix_sorter #(.NIN(L), .NOUT(L), .KEY_W(PW), .TAG_W(Q)) u_index (
      .key_in(i_surv), .tag_in(m_surv), .key_out(i_out), .tag_out(m_out));
  end

endmodule
