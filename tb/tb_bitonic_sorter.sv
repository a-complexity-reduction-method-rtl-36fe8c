// tb_bitonic_sorter: self-checking test of the bitonic sorting network.
//
// NIN = 8 and NIN = 4 instances with random 4-bit keys (many ties) and
// random 10-bit tags. Expected output: the {key, tag} words sorted
// ascending by an insertion sort in the testbench. Watchdog included.
module tb_bitonic_sorter;
  localparam int KW = 4, TW = 10, NV = 400;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [KW-1:0] k8_in [8], k8_out [8], k4_in [4], k4_out [4];
  logic [TW-1:0] t8_in [8], t8_out [8], t4_in [4], t4_out [4];

  bitonic_sorter #(.NIN(8), .KEY_W(KW), .TAG_W(TW)) dut8 (
    .key_in(k8_in), .tag_in(t8_in), .key_out(k8_out), .tag_out(t8_out));
  bitonic_sorter #(.NIN(4), .KEY_W(KW), .TAG_W(TW)) dut4 (
    .key_in(k4_in), .tag_in(t4_in), .key_out(k4_out), .tag_out(t4_out));

  function automatic void ref_sort(input int n, inout int v [8]);
    for (int i = 1; i < n; i++) begin
      int x = v[i], j = i - 1;
      while (j >= 0 && v[j] > x) begin v[j+1] = v[j]; j--; end
      v[j+1] = x;
    end
  endfunction

  initial begin
    int v8 [8], v4 [8];
    for (int t = 0; t < NV; t++) begin
      for (int i = 0; i < 8; i++) begin
        k8_in[i] = KW'($urandom_range(0, 15));
        t8_in[i] = TW'($urandom_range(0, 1023));
        v8[i] = int'({k8_in[i], t8_in[i]});
      end
      for (int i = 0; i < 4; i++) begin
        k4_in[i] = k8_in[7 - i];
        t4_in[i] = t8_in[i];
        v4[i] = int'({k4_in[i], t4_in[i]});
      end
      @(posedge clk); #1;
      ref_sort(8, v8);
      ref_sort(4, v4);
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (int'({k8_out[k], t8_out[k]}) != v8[k]) begin
          failures++;
          if (failures < 10) $display("vec %0d slot %0d: got %0h exp %0h", t, k, {k8_out[k], t8_out[k]}, v8[k]);
        end
      end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (int'({k4_out[k], t4_out[k]}) != v4[k]) failures++;
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
