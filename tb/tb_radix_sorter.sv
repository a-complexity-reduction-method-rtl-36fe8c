// tb_radix_sorter: self-checking test of the all-pairs sorter.
//
// Two instances: 16 -> 8 (radix-2L metric stage for L = 8) and 8 -> 8
// (radix-L index stage). Keys are random and only 4 bits wide, so ties are
// frequent; tags are the input positions. The expected output is the
// inputs sorted by {key, position} with an insertion sort in the testbench,
// truncated to NOUT. A watchdog ends the run after a fixed cycle count.
module tb_radix_sorter;
  localparam int KW = 4, TW = 4, NV = 400;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [KW-1:0] ka_in [16], ka_out [8];
  logic [TW-1:0] ta_in [16], ta_out [8];
  logic [KW-1:0] kb_in [8],  kb_out [8];
  logic [TW-1:0] tb_in [8],  tb_out [8];

  radix_sorter #(.NIN(16), .NOUT(8), .KEY_W(KW), .TAG_W(TW)) dut_a (
    .key_in(ka_in), .tag_in(ta_in), .key_out(ka_out), .tag_out(ta_out));
  radix_sorter #(.NIN(8), .NOUT(8), .KEY_W(KW), .TAG_W(TW)) dut_b (
    .key_in(kb_in), .tag_in(tb_in), .key_out(kb_out), .tag_out(tb_out));

  // Reference: sort (key, position) pairs; returns packed key*16+pos.
  function automatic void ref_sort(input int n, input int keys [16], output int res [16]);
    int v [16];
    for (int i = 0; i < n; i++) v[i] = keys[i] * 16 + i;
    for (int i = 1; i < n; i++) begin
      int x = v[i], j = i - 1;
      while (j >= 0 && v[j] > x) begin v[j+1] = v[j]; j--; end
      v[j+1] = x;
    end
    res = v;
  endfunction

  initial begin
    int keys [16], res [16];
    for (int t = 0; t < NV; t++) begin
      for (int i = 0; i < 16; i++) begin
        keys[i] = (t < 20) ? (t % 3) : int'($urandom_range(0, 15));  // early vectors: all equal
        ka_in[i] = KW'(keys[i]);
        ta_in[i] = TW'(i);
      end
      for (int i = 0; i < 8; i++) begin kb_in[i] = ka_in[15 - i]; tb_in[i] = TW'(i); end
      @(posedge clk); #1;
      ref_sort(16, keys, res);
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (ka_out[k] != KW'(res[k] / 16) || ta_out[k] != TW'(res[k] % 16)) begin
          failures++;
          if (failures < 10) $display("A vec %0d slot %0d: got %0d/%0d exp %0d/%0d", t, k, ka_out[k], ta_out[k], res[k]/16, res[k]%16);
        end
      end
      for (int i = 0; i < 8; i++) keys[i] = int'(kb_in[i]);
      ref_sort(8, keys, res);
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (kb_out[k] != KW'(res[k] / 16) || tb_out[k] != TW'(res[k] % 16)) failures++;
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
