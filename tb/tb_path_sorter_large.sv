// tb_path_sorter_large: the two-stage survivor sorter at the larger list
// sizes of the sorter comparison, L = 16 and L = 32, all three designs.
//
// Candidate indexes are 0..2L-1 in input order, as in the decoder; metrics
// are random, half of the vectors from a narrow range so ties are common.
// Reference: pick the L smallest (metric, index) pairs by repeated
// minimum search, then list them by index. Every design must match it
// exactly. Watchdog included.
module tb_path_sorter_large;
  localparam int Q = 10, NV = 150;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [Q-1:0] m16_in [32], m32_in [64];
  logic [4:0]   i16_in [32];
  logic [5:0]   i32_in [64];
  logic [Q-1:0] m16_out [3][16], m32_out [3][32];
  logic [4:0]   i16_out [3][16];
  logic [5:0]   i32_out [3][32];

  for (genvar d = 0; d < 3; d++) begin : g_dut
    path_sorter #(.L(16), .Q(Q), .DESIGN(d + 1)) dut16 (
      .m_in(m16_in), .i_in(i16_in), .m_out(m16_out[d]), .i_out(i16_out[d]));
    path_sorter #(.L(32), .Q(Q), .DESIGN(d + 1)) dut32 (
      .m_in(m32_in), .i_in(i32_in), .m_out(m32_out[d]), .i_out(i32_out[d]));
  end

  function automatic void ref_surv(input int n, input int m [64], output int idx [32]);
    bit taken [64];
    int s, b;
    for (int c = 0; c < n; c++) taken[c] = 0;
    for (int r = 0; r < n / 2; r++) begin
      b = -1;
      for (int c = 0; c < n; c++)
        if (!taken[c] && (b < 0 || m[c] < m[b])) b = c;
      taken[b] = 1;
    end
    s = 0;
    for (int c = 0; c < n; c++) if (taken[c]) begin idx[s] = c; s++; end
  endfunction

  initial begin
    int m [64], idx [32], range;
    for (int t = 0; t < NV; t++) begin
      range = (t % 2) ? 15 : 1023;
      for (int c = 0; c < 64; c++) begin
        m[c] = $urandom_range(0, range);
        m32_in[c] = Q'(m[c]);
        i32_in[c] = 6'(c);
      end
      for (int c = 0; c < 32; c++) begin m16_in[c] = m32_in[c]; i16_in[c] = 5'(c); end
      @(posedge clk); #1;
      ref_surv(64, m, idx);
      for (int d = 0; d < 3; d++)
        for (int k = 0; k < 32; k++) begin
          checks++;
          if (int'(i32_out[d][k]) != idx[k] || int'(m32_out[d][k]) != m[idx[k]]) begin
            failures++;
            if (failures < 10) $display("L32 D%0d vec %0d slot %0d wrong", d + 1, t, k);
          end
        end
      ref_surv(32, m, idx);
      for (int d = 0; d < 3; d++)
        for (int k = 0; k < 16; k++) begin
          checks++;
          if (int'(i16_out[d][k]) != idx[k] || int'(m16_out[d][k]) != m[idx[k]]) begin
            failures++;
            if (failures < 10) $display("L16 D%0d vec %0d slot %0d wrong", d + 1, t, k);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV * 2 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
