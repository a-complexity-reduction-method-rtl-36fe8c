// bitonic_sorter: Batcher bitonic sorting network, fully combinational.
//
// Sorts NIN entries (NIN a power of two) into ascending order of
// {key, tag}. The network has log2(NIN)*(log2(NIN)+1)/2 layers of
// compare-and-swap elements; element (i, i^j) of a layer sorts ascending when
// bit k of i is 0 and descending otherwise, as in Batcher's construction.
// Comparing the tag after the key makes the order total, so equal keys are
// ordered by tag.
//
// Used as the index stage of sorter Design 1 (key = candidate index,
// tag = path metric). The network itself is the textbook one; only its use
// here comes from the sorter design table. Outputs follow the inputs in the
// same cycle.
module bitonic_sorter #(
  parameter int unsigned NIN   = 8,
  parameter int unsigned KEY_W = 4,
  parameter int unsigned TAG_W = 10
) (
  input  logic [KEY_W-1:0] key_in  [NIN],
  input  logic [TAG_W-1:0] tag_in  [NIN],
  output logic [KEY_W-1:0] key_out [NIN],
  output logic [TAG_W-1:0] tag_out [NIN]
);

  localparam int unsigned W = KEY_W + TAG_W;

  logic [W-1:0] v [NIN];

  always_comb begin
    logic [W-1:0] t;
    t = '0;
    for (int i = 0; i < NIN; i++) v[i] = {key_in[i], tag_in[i]};
    for (int k = 2; k <= NIN; k = k * 2) begin
      for (int j = k / 2; j > 0; j = j / 2) begin
        for (int i = 0; i < NIN; i++) begin
          if ((i ^ j) > i) begin
            if (((i & k) == 0) ? (v[i] > v[i ^ j]) : (v[i] < v[i ^ j])) begin
              t        = v[i];
              v[i]     = v[i ^ j];
              v[i ^ j] = t;
            end
          end
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NIN; i++) begin
      key_out[i] = v[i][W-1:TAG_W];
      tag_out[i] = v[i][TAG_W-1:0];
    end
  end

endmodule
