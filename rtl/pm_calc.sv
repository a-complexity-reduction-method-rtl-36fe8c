// pm_calc: LLR-based path metric calculator.
//
// For each existing path l it forms the metrics of its two candidate paths,
// 2l (bit 0) and 2l+1 (bit 1), from the path's metric pm_in[l] and the
// decision LLR llr[l] of the current bit:
//   the candidate whose bit agrees with the LLR's hard decision keeps the
//   metric, the other one gets pm + |llr|
// (hard decision 1 when the LLR is negative). This is the usual LLR-based
// path metric of SCL decoding; smaller is better. LLRs are in sign-magnitude
// form, sign in the top bit, as in the reference decoder. Sums saturate at
// 2^Q-1, a choice of this design.
//
// For a frozen bit the path keeps the candidate of the known value
// frozen_val, given on pm_frozen. Combinational; no clock.
module pm_calc #(
  parameter int unsigned L     = scl_pkg::DEF_L,
  parameter int unsigned Q     = scl_pkg::DEF_Q,
  parameter int unsigned LLR_W = scl_pkg::DEF_LLR_W
) (
  input  logic [Q-1:0]     pm_in     [L],
  input  logic [LLR_W-1:0] llr       [L],
  input  logic             frozen_val,
  output logic [Q-1:0]     m_cand    [2*L],
  output logic [Q-1:0]     pm_frozen [L]
);

  function automatic logic [Q-1:0] sat_add(input logic [Q-1:0] a, input logic [LLR_W-2:0] b);
    logic [Q:0] s;
    s = {1'b0, a} + (Q + 1)'(b);
    return s[Q] ? '1 : s[Q-1:0];
  endfunction

  always_comb begin
    for (int l = 0; l < L; l++) begin
      logic             neg;
      logic [LLR_W-2:0] mag;
      neg = llr[l][LLR_W-1];
      mag = llr[l][LLR_W-2:0];
      m_cand[2*l]   = neg ? sat_add(pm_in[l], mag) : pm_in[l];  // bit 0
      m_cand[2*l+1] = neg ? pm_in[l] : sat_add(pm_in[l], mag);  // bit 1
      pm_frozen[l]  = frozen_val ? m_cand[2*l+1] : m_cand[2*l];
    end
  end

endmodule
