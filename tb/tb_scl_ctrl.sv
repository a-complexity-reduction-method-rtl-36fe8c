// tb_scl_ctrl: self-checking test of the bit-level controller.
//
// N = 32, L = 8. Two codewords with random frozen masks and random gaps in
// step_in. For every accepted step the testbench checks bit_idx and the
// step type against its own count of paths (expand while fewer than L paths
// exist, prune afterwards, frozen where the mask says so), that done pulses
// exactly once right after bit N-1, and that busy drops then. A restart
// in the middle of a codeword is also checked. Watchdog included.
module tb_scl_ctrl;
  import scl_pkg::*;
  localparam int L = 8, N = 32;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, step_in, busy, step_fire, done;
  logic [N-1:0] frozen_mask;
  step_e step;
  logic [4:0] bit_idx;
  logic [3:0] gamma_log;

  scl_ctrl #(.L(L), .N(N)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic run_codeword(input int stop_after);
    int npaths, i, cyc, dones;
    step_e exp_step;
    for (int b = 0; b < N; b++) frozen_mask[b] = ($urandom_range(0, 2) == 0);
    frozen_mask[3] = 1'b0;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    npaths = 1; i = 0; cyc = 0; dones = 0;
    while (i < N && i < stop_after) begin
      step_in = ($urandom_range(0, 3) != 0);
      #1;
      if (frozen_mask[i]) exp_step = STEP_FROZEN;
      else if (npaths < L) exp_step = STEP_EXPAND;
      else exp_step = STEP_PRUNE;
      chk(busy, "busy while decoding");
      chk(int'(bit_idx) == i, "bit index");
      chk(step == exp_step, "step type");
      chk(step_fire == step_in, "step accepted");
      chk((1 << gamma_log) == npaths, "path count");
      @(posedge clk); #1;
      if (done) dones++;
      if (step_in) begin
        if (exp_step == STEP_EXPAND) npaths *= 2;
        i++;
      end
      cyc++;
    end
    step_in = 0;
    if (i == N) begin
      chk(dones == 1 && done, "done right after the last step");
      chk(!busy, "idle after the last step");
      @(posedge clk); #1;
      chk(!done, "done is a pulse");
    end
  endtask

  initial begin
    rst_n = 0; start = 0; step_in = 0; frozen_mask = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(!busy && !done, "idle after reset");
    run_codeword(N);
    run_codeword(10);  // abandoned codeword, restarted by the next start
    run_codeword(N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
