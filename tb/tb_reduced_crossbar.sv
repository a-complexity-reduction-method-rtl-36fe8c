// tb_reduced_crossbar: self-checking test of the (L/2+1)-input crossbar.
//
// Part 1 drives random contents and random selects 0..L/2 into L = 8 and
// L = 4 crossbars and checks d_out[k] = d_in[floor(k/2) + sel[k]].
// Part 2 checks the claim the crossbar is built on: for random sets of L
// survivors out of 2L candidates, listed in ascending index order, the
// source path floor(i_k/2) of every slot k lies in the crossbar window
// (select 0..L/2). Watchdog included.
module tb_reduced_crossbar;
  localparam int W = 16, NV = 400;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [W-1:0] a_in [8], a_out [8], b_in [4], b_out [4];
  logic [2:0]   a_sel [8];
  logic [1:0]   b_sel [4];

  reduced_crossbar #(.L(8), .W(W)) dut8 (.d_in(a_in), .sel(a_sel), .d_out(a_out));
  reduced_crossbar #(.L(4), .W(W)) dut4 (.d_in(b_in), .sel(b_sel), .d_out(b_out));

  initial begin
    int s8 [8], s4 [4];
    for (int t = 0; t < NV; t++) begin
      for (int k = 0; k < 8; k++) begin
        a_in[k] = W'($urandom); s8[k] = $urandom_range(0, 4); a_sel[k] = 3'(s8[k]);
      end
      for (int k = 0; k < 4; k++) begin
        b_in[k] = W'($urandom); s4[k] = $urandom_range(0, 2); b_sel[k] = 2'(s4[k]);
      end
      @(posedge clk); #1;
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (a_out[k] != a_in[k / 2 + s8[k]]) begin
          failures++;
          if (failures < 10) $display("L8 vec %0d out %0d sel %0d wrong", t, k, s8[k]);
        end
      end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (b_out[k] != b_in[k / 2 + s4[k]]) failures++;
      end
    end
    // Window property for L = 2, 4, 8, 16, 32.
    for (int l = 2; l <= 32; l *= 2) begin
      for (int t = 0; t < 200; t++) begin
        bit take [64];
        int cnt, k, c;
        cnt = 0;
        k = 0;
        for (int c = 0; c < 2 * l; c++) take[c] = 0;
        while (cnt < l) begin
          c = $urandom_range(0, 2 * l - 1);
          if (!take[c]) begin take[c] = 1; cnt++; end
        end
        for (int c2 = 0; c2 < 2 * l; c2++) if (take[c2]) begin
          int src;
          src = c2 / 2;
          checks++;
          if (src < int'(scl_pkg::xbar_lo(k)) || src > int'(scl_pkg::xbar_hi(k, l)) ||
              int'(scl_pkg::xbar_hi(k, l) - scl_pkg::xbar_lo(k)) + 1 != l / 2 + 1) failures++;
          k++;
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
