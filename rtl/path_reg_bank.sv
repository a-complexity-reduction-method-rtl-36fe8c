// path_reg_bank: per-path registers that are copied after pruning.
//
// One W-bit register per path. It serves the two other kinds of per-path
// state that follow a path when it is copied: the partial-sum registers of
// the PS unit (P + N/2 bits per path in the reference decoder) and the LLR
// pointer registers of the LLR memory ((log2 N - 1) log2 L bits per path).
// On copy_en every path k loads the register of its source path through the
// reduced (L/2+1)-input crossbar (source = floor(k/2) + sel[k]). Otherwise
// path k loads wr_data[k] when wr_en[k] is set; that port belongs to the
// per-path logic that owns the contents (partial-sum network, LLR memory
// controller). A copy and a write in the same cycle are not allowed
// (asserted); that rule is this design's.
//
// Reset is asynchronous, active low, and clears the registers.
module path_reg_bank #(
  parameter int unsigned L     = scl_pkg::DEF_L,
  parameter int unsigned W     = scl_pkg::DEF_P + scl_pkg::DEF_N / 2,
  parameter int unsigned SEL_W = $clog2(L / 2 + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             copy_en,
  input  logic [SEL_W-1:0] sel     [L],
  input  logic             wr_en   [L],
  input  logic [W-1:0]     wr_data [L],
  output logic [W-1:0]     q       [L]
);

  logic [W-1:0] copied [L];

  reduced_crossbar #(.L(L), .W(W), .SEL_W(SEL_W)) u_xbar (
    .d_in(q), .sel(sel), .d_out(copied));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < L; k++) q[k] <= '0;
    end else begin
      for (int k = 0; k < L; k++) begin
        if (copy_en)       q[k] <= copied[k];
        else if (wr_en[k]) q[k] <= wr_data[k];
      end
    end
  end

  for (genvar k = 0; k < L; k++) begin : g_excl_chk
    assert property (@(posedge clk) disable iff (!rst_n) !(copy_en && wr_en[k]));
  end

endmodule
