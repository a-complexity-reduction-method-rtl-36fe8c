// tb_path_memory: self-checking test of the decoded-bit registers.
//
// L = 8, N = 64. Random steps: bit index, copy or no copy, selects 0..L/2
// and new bits. The reference copies by parent index floor(k/2)+sel[k]
// (when copying) and then writes the new bit at the bit index. A cycle
// without wr_en must leave everything unchanged. All registers are
// compared after every cycle. Watchdog included.
module tb_path_memory;
  localparam int L = 8, N = 64, NV = 600;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         rst_n, wr_en, copy_en;
  logic [5:0]   bit_idx;
  logic [2:0]   sel [L];
  logic         new_bit [L];
  logic [N-1:0] paths [L], r [L], nr [L];

  path_memory #(.L(L), .N(N)) dut (.*);

  initial begin
    rst_n = 0; wr_en = 0; copy_en = 0; bit_idx = '0;
    for (int k = 0; k < L; k++) begin sel[k] = '0; new_bit[k] = 0; r[k] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < NV; t++) begin
      wr_en   = ($urandom_range(0, 4) != 0);
      copy_en = ($urandom_range(0, 1) == 1);
      bit_idx = 6'($urandom_range(0, N - 1));
      for (int k = 0; k < L; k++) begin
        sel[k] = 3'($urandom_range(0, 4));
        new_bit[k] = 1'($urandom_range(0, 1));
      end
      for (int k = 0; k < L; k++) begin
        nr[k] = copy_en ? r[k / 2 + int'(sel[k])] : r[k];
        nr[k][bit_idx] = new_bit[k];
      end
      if (wr_en) r = nr;
      @(posedge clk); #1;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (paths[k] != r[k]) begin
          failures++;
          if (failures < 10) $display("cycle %0d path %0d: got %h exp %h", t, k, paths[k], r[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
