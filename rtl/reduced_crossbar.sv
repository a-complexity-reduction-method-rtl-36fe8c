// reduced_crossbar: the (L/2+1)-to-1 copy crossbar.
//
// After pruning, path k must take the register contents of the existing
// path its survivor came from. Because survivors are ordered by candidate
// index, that source always lies in the window floor(k/2) .. floor((L+k)/2),
// L/2+1 paths wide, so every output here is an (L/2+1)-input multiplexer
// over that window instead of an L-input one. sel[k] is the offset of the
// source within the window: source = floor(k/2) + sel[k]. A select beyond
// L/2 (only possible when L/2+1 is not a power of two) gives zero. The
// window follows from the index ordering of the survivors; the select
// encoding and the zero default are this design's choices.
//
// d_in[l] is the content of path l's register, W bits wide; d_out[k] is the
// value to load into path k. Combinational; the owner of the registers
// decides when to load.
module reduced_crossbar #(
  parameter int unsigned L     = scl_pkg::DEF_L,
  parameter int unsigned W     = scl_pkg::DEF_N,
  parameter int unsigned SEL_W = $clog2(L / 2 + 1)
) (
  input  logic [W-1:0]     d_in  [L],
  input  logic [SEL_W-1:0] sel   [L],
  output logic [W-1:0]     d_out [L]
);

  localparam int unsigned NSRC = scl_pkg::xbar_inputs(L);

  for (genvar k = 0; k < L; k++) begin : g_path
    localparam int unsigned LO = scl_pkg::xbar_lo(k);
    // The window of path k: exactly the paths this output can copy from.
    logic [W-1:0] win [NSRC];
    for (genvar j = 0; j < NSRC; j++) begin : g_src
      assign win[j] = d_in[LO + j];
    end
    always_comb begin
      d_out[k] = '0;
      for (int j = 0; j < NSRC; j++) begin
        if (sel[k] == SEL_W'(j)) d_out[k] = win[j];
      end
    end
  end

endmodule
