// tb_path_sorter: self-checking test of the two-stage survivor sorter.
//
// All three designs are instantiated side by side for L = 8 (and Design 1
// and 3 for L = 4) and fed the same 2L candidate metrics, with candidate
// indexes 0..2L-1 in input order as in the decoder. Metrics are drawn from
// a narrow range so ties are common. Reference: select the L smallest
// (metric, index) pairs, then order them by index. The testbench also
// checks the property the reduced crossbars rely on, i_out strictly
// increasing with i_out[k] in k..L+k. Watchdog included.
module tb_path_sorter;
  localparam int Q = 10, NV = 400;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [Q-1:0] m8_in [16], m4_in [8];
  logic [3:0]   i8_in [16];
  logic [2:0]   i4_in [8];
  logic [Q-1:0] m8_out [3][8], m4_out [2][4];
  logic [3:0]   i8_out [3][8];
  logic [2:0]   i4_out [2][4];

  for (genvar d = 0; d < 3; d++) begin : g_l8
    path_sorter #(.L(8), .Q(Q), .DESIGN(d + 1)) dut (
      .m_in(m8_in), .i_in(i8_in), .m_out(m8_out[d]), .i_out(i8_out[d]));
  end
  path_sorter #(.L(4), .Q(Q), .DESIGN(1)) dut4_1 (
    .m_in(m4_in), .i_in(i4_in), .m_out(m4_out[0]), .i_out(i4_out[0]));
  path_sorter #(.L(4), .Q(Q), .DESIGN(3)) dut4_3 (
    .m_in(m4_in), .i_in(i4_in), .m_out(m4_out[1]), .i_out(i4_out[1]));

  // Reference survivors (indexes, ascending) of n candidates, n/2 survive.
  function automatic void ref_surv(input int n, input int m [16], output int idx [8]);
    bit taken [16];
    int l = n / 2;
    for (int c = 0; c < n; c++) taken[c] = 0;
    for (int s = 0; s < l; s++) begin
      int b = -1;
      for (int c = 0; c < n; c++)
        if (!taken[c] && (b < 0 || m[c] < m[b])) b = c;
      taken[b] = 1;
    end
    begin
      int s = 0;
      for (int c = 0; c < n; c++) if (taken[c]) begin idx[s] = c; s++; end
    end
  endfunction

  initial begin
    int m [16], idx [8];
    for (int t = 0; t < NV; t++) begin
      int range;
      range = (t % 2) ? 7 : 1023;
      for (int c = 0; c < 16; c++) begin
        m[c] = $urandom_range(0, range);
        m8_in[c] = Q'(m[c]);
        i8_in[c] = 4'(c);
      end
      for (int c = 0; c < 8; c++) begin m4_in[c] = m8_in[c + 3]; i4_in[c] = 3'(c); end
      @(posedge clk); #1;
      ref_surv(16, m, idx);
      for (int d = 0; d < 3; d++)
        for (int k = 0; k < 8; k++) begin
          checks++;
          if (int'(i8_out[d][k]) != idx[k] || int'(m8_out[d][k]) != m[idx[k]]) begin
            failures++;
            if (failures < 10) $display("L8 D%0d vec %0d slot %0d: got %0d/%0d exp %0d/%0d", d+1, t, k, i8_out[d][k], m8_out[d][k], idx[k], m[idx[k]]);
          end
          checks++;
          if (int'(i8_out[d][k]) < k || int'(i8_out[d][k]) > 8 + k) failures++;
        end
      for (int c = 0; c < 8; c++) m[c] = int'(m4_in[c]);
      ref_surv(8, m, idx);
      for (int d = 0; d < 2; d++)
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (int'(i4_out[d][k]) != idx[k] || int'(m4_out[d][k]) != m[idx[k]]) failures++;
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
