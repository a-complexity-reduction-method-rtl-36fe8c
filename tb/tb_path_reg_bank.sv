// tb_path_reg_bank: self-checking test of the copied per-path registers.
//
// L = 8, W = 40. Random cycles of three kinds: a copy with random selects
// 0..L/2, per-path writes of random data, or nothing. The reference keeps
// the same registers and copies by parent index floor(k/2)+sel[k].
// All registers are compared after every cycle. Watchdog included.
module tb_path_reg_bank;
  localparam int L = 8, W = 40, NV = 600;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         rst_n, copy_en;
  logic [2:0]   sel [L];
  logic         wr_en [L];
  logic [W-1:0] wr_data [L], q [L], r [L], nr [L];

  path_reg_bank #(.L(L), .W(W)) dut (.*);

  initial begin
    rst_n = 0; copy_en = 0;
    for (int k = 0; k < L; k++) begin wr_en[k] = 0; wr_data[k] = '0; sel[k] = '0; r[k] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < NV; t++) begin
      int kind;
      kind = $urandom_range(0, 2);
      copy_en = (kind == 0);
      for (int k = 0; k < L; k++) begin
        sel[k]     = 3'($urandom_range(0, 4));
        wr_en[k]   = (kind == 1) && ($urandom_range(0, 1) == 1);
        wr_data[k] = {$urandom, $urandom};
      end
      for (int k = 0; k < L; k++) begin
        if (copy_en) nr[k] = r[k / 2 + int'(sel[k])];
        else if (wr_en[k]) nr[k] = wr_data[k];
        else nr[k] = r[k];
      end
      r = nr;
      @(posedge clk); #1;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (q[k] != r[k]) begin
          failures++;
          if (failures < 10) $display("cycle %0d path %0d: got %h exp %h", t, k, q[k], r[k]);
        end
      end
    end
    copy_en = 0;
    for (int k = 0; k < L; k++) wr_en[k] = 0;
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
