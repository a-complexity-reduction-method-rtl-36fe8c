// tb_mvf_sorter: self-checking test of the maximum values filter.
//
// 16 -> 8 and 8 -> 4 instances. Keys are random 4-bit values (frequent
// ties), tags are the input positions, so the expected result is unique:
// the NIN/2 smallest {key, position} pairs. The MVF output is unordered,
// so the testbench sorts both the output and the reference before
// comparing them. Watchdog included.
module tb_mvf_sorter;
  localparam int KW = 4, TW = 4, NV = 400;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [KW-1:0] ka_in [16], ka_out [8], kb_in [8], kb_out [4];
  logic [TW-1:0] ta_in [16], ta_out [8], tb_in [8], tb_out [4];

  mvf_sorter #(.NIN(16), .KEY_W(KW), .TAG_W(TW)) dut_a (
    .key_in(ka_in), .tag_in(ta_in), .key_out(ka_out), .tag_out(ta_out));
  mvf_sorter #(.NIN(8), .KEY_W(KW), .TAG_W(TW)) dut_b (
    .key_in(kb_in), .tag_in(tb_in), .key_out(kb_out), .tag_out(tb_out));

  function automatic void ref_sort(input int n, inout int v [16]);
    for (int i = 1; i < n; i++) begin
      int x = v[i], j = i - 1;
      while (j >= 0 && v[j] > x) begin v[j+1] = v[j]; j--; end
      v[j+1] = x;
    end
  endfunction

  initial begin
    int ra [16], rb [16], oa [16], ob [16];
    for (int t = 0; t < NV; t++) begin
      for (int i = 0; i < 16; i++) begin
        ka_in[i] = KW'($urandom_range(0, 15));
        ta_in[i] = TW'(i);
        ra[i] = int'(ka_in[i]) * 16 + i;
      end
      for (int i = 0; i < 8; i++) begin
        kb_in[i] = ka_in[2 * i];
        tb_in[i] = TW'(i);
        rb[i] = int'(kb_in[i]) * 16 + i;
      end
      @(posedge clk); #1;
      for (int i = 0; i < 8; i++) oa[i] = int'(ka_out[i]) * 16 + int'(ta_out[i]);
      for (int i = 0; i < 4; i++) ob[i] = int'(kb_out[i]) * 16 + int'(tb_out[i]);
      ref_sort(16, ra); ref_sort(8, oa);
      ref_sort(8, rb);  ref_sort(4, ob);
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (oa[k] != ra[k]) begin
          failures++;
          if (failures < 10) $display("vec %0d slot %0d: got %0d exp %0d", t, k, oa[k], ra[k]);
        end
      end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (ob[k] != rb[k]) failures++;
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
