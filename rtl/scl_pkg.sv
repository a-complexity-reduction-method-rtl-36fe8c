// scl_pkg: constants, types and helper functions shared by the SCL list
// management RTL.
//
// The default sizes are those of the reference decoder: list size L = 8,
// code length N = 4096 and P = 32 processing elements. The metric width Q
// and the LLR width are this design's own choices, because no quantisation
// is specified for them.
//
// Path numbering. Paths, candidates and crossbar ports are numbered from 0 in
// the RTL. Existing path l (0..L-1) splits into candidates 2l (bit 0) and
// 2l+1 (bit 1). When the L survivors are ordered by candidate index, output
// path k can only take its contents from existing paths floor(k/2) to
// floor((L+k)/2). That is L/2+1 sources. The functions below give that
// window; they are the 0-based form of the bound
//   floor((k-1)/2)+1 <= floor((i_k-1)/2)+1 <= floor((L+k-1)/2)+1.
package scl_pkg;

  localparam int unsigned DEF_L     = 8;     // list size
  localparam int unsigned DEF_N     = 4096;  // code length
  localparam int unsigned DEF_P     = 32;    // processing elements (semi-parallel SC)
  localparam int unsigned DEF_Q     = 10;    // path metric width q (own choice)
  localparam int unsigned DEF_LLR_W = 6;     // sign-magnitude LLR width (own choice)

  // What the list management does with the current bit (Algorithm 1).
  typedef enum logic [1:0] {
    STEP_FROZEN = 2'd0,  // frozen bit: every path takes the known value
    STEP_EXPAND = 2'd1,  // information bit while fewer than L paths: split all
    STEP_PRUNE  = 2'd2   // information bit with L paths: sort and prune 2L -> L
  } step_e;

  // Lowest existing path that output path k may copy from.
  function automatic int unsigned xbar_lo(input int unsigned k);
    return k / 2;
  endfunction

  // Highest existing path that output path k may copy from (list size l).
  function automatic int unsigned xbar_hi(input int unsigned k, input int unsigned l);
    return (l + k) / 2;
  endfunction

  // Number of crossbar inputs per path: L/2 + 1.
  function automatic int unsigned xbar_inputs(input int unsigned l);
    return l / 2 + 1;
  endfunction

endpackage
