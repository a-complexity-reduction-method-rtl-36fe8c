// path_memory: decoded-bit registers of the L paths.
//
// Each path owns an N-bit register holding its decoded bits u_0..u_{N-1}.
// At a step (wr_en) path k loads either its own register (copy_en = 0,
// frozen bit) or the register of its source path through the reduced
// (L/2+1)-input crossbar (copy_en = 1), and in the same clock edge bit
// bit_idx is overwritten with the path's new decision new_bit[k]. The
// register organisation (N bits per path, copied by a crossbar) is that of
// the reference decoder; bit order (bit i at position i) is this design's.
//
// All L registers are outputs (the decoded sequences of paths 1..L).
// Reset is asynchronous, active low, and clears the registers.
module path_memory #(
  parameter int unsigned L     = scl_pkg::DEF_L,
  parameter int unsigned N     = scl_pkg::DEF_N,
  parameter int unsigned SEL_W = $clog2(L / 2 + 1),
  parameter int unsigned IW    = $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [IW-1:0]    bit_idx,
  input  logic             copy_en,
  input  logic [SEL_W-1:0] sel     [L],
  input  logic             new_bit [L],
  output logic [N-1:0]     paths   [L]
);

  logic [N-1:0] copied [L];
  logic [N-1:0] nxt    [L];

  reduced_crossbar #(.L(L), .W(N), .SEL_W(SEL_W)) u_xbar (
    .d_in(paths), .sel(sel), .d_out(copied));

  // Next content: copied or own register, with bit bit_idx replaced. One
  // shared one-hot decode of bit_idx serves all paths.
  logic [N-1:0] wmask;
  assign wmask = N'(1) << bit_idx;

  always_comb begin
    for (int k = 0; k < L; k++) begin
      nxt[k] = ((copy_en ? copied[k] : paths[k]) & ~wmask) | (new_bit[k] ? wmask : '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < L; k++) paths[k] <= '0;
    end else if (wr_en) begin
      for (int k = 0; k < L; k++) paths[k] <= nxt[k];
    end
  end

endmodule
