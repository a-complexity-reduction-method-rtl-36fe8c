// scl_ctrl: bit-level control of the list management.
//
// Walks the bit index i from 0 to N-1, one step per accepted decision
// (step_in while busy). For each bit it says what the list management must
// do, following the SCL algorithm:
//   STEP_FROZEN  bit i is frozen (frozen_mask[i] = 1): no split, no copy;
//   STEP_EXPAND  information bit while fewer than L paths exist: every path
//                splits in two, the number of paths 2^gamma_log doubles;
//   STEP_PRUNE   information bit with L paths: 2L candidates are sorted and
//                L survive.
// The frozen mask is an input so the code rate can change from codeword to
// codeword; that interface, the valid strobe without back-pressure and the
// restart-at-any-time rule are this design's choices. A start pulse (re)starts a codeword with one path; done pulses
// for one cycle after the step of bit N-1 has been taken.
//
// Timing: step, bit_idx and gamma_log are registered state, valid during
// the cycle in which the step is taken; they advance at the clock edge that
// takes it. One bit per cycle is accepted, so the list management adds at
// most N cycles to a codeword. Reset is asynchronous, active low.
module scl_ctrl
  import scl_pkg::*;
#(
  parameter int unsigned L  = scl_pkg::DEF_L,
  parameter int unsigned N  = scl_pkg::DEF_N,
  parameter int unsigned GW = $clog2(L) + 1,
  parameter int unsigned IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [N-1:0]  frozen_mask,
  input  logic          step_in,
  output logic          busy,
  output logic          step_fire,
  output step_e         step,
  output logic [IW-1:0] bit_idx,
  output logic [GW-1:0] gamma_log,
  output logic          done
);

  localparam logic [GW-1:0] LOG_L = GW'($clog2(L));

  assign step_fire = busy && step_in && !start;

  always_comb begin
    if (frozen_mask[bit_idx])   step = STEP_FROZEN;
    else if (gamma_log < LOG_L) step = STEP_EXPAND;
    else                        step = STEP_PRUNE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      bit_idx   <= '0;
      gamma_log <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy      <= 1'b1;
        bit_idx   <= '0;
        gamma_log <= '0;
      end else if (step_fire) begin
        if (step == STEP_EXPAND) gamma_log <= gamma_log + 1'b1;
        if (bit_idx == IW'(N - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          bit_idx <= bit_idx + 1'b1;
        end
      end
    end
  end

  // The number of paths never exceeds L.
  assert property (@(posedge clk) disable iff (!rst_n) gamma_log <= LOG_L);

endmodule
