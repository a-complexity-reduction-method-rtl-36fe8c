// mvf_sorter: maximum values filter (MVF), fully combinational.
//
// Returns the NOUT = NIN/2 smallest of NIN entries, in no particular order.
// It is a bitonic sorting network with its final merge cut short: the first
// log2(NIN)-1 merge phases sort the lower half ascending and the upper half
// descending, which makes the whole vector bitonic. One layer of
// compare-and-swap elements between entry i and entry i+NIN/2 then leaves
// the NIN/2 smallest entries in the lower half. The log2(NIN)-1 layers that
// would sort that half are omitted, which is what makes the filter cheaper
// than a full sorter.
//
// Entries are compared as {key, tag}; with distinct tags (candidate indexes)
// the chosen set is unique even when metrics tie: the NOUT smallest by
// metric, ties going to the smaller candidate index.
//
// Used as the metric stage of sorter Designs 1 and 2 (key = path metric,
// tag = candidate index). Outputs follow the inputs in the same cycle.
module mvf_sorter #(
  parameter int unsigned NIN   = 16,
  parameter int unsigned KEY_W = 10,
  parameter int unsigned TAG_W = 4
) (
  input  logic [KEY_W-1:0] key_in  [NIN],
  input  logic [TAG_W-1:0] tag_in  [NIN],
  output logic [KEY_W-1:0] key_out [NIN/2],
  output logic [TAG_W-1:0] tag_out [NIN/2]
);

  localparam int unsigned W = KEY_W + TAG_W;
  localparam int unsigned H = NIN / 2;

  logic [W-1:0] v [NIN];

  always_comb begin
    logic [W-1:0] t;
    t = '0;
    for (int i = 0; i < NIN; i++) v[i] = {key_in[i], tag_in[i]};
    // Bitonic phases up to block size NIN/2: lower half ascending, upper
    // half descending.
    for (int k = 2; k <= H; k = k * 2) begin
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
    // First layer of the final merge only: keep the minimum of each pair.
    for (int i = 0; i < H; i++) begin
      if (v[i] > v[i + H]) v[i] = v[i + H];
    end
  end

  always_comb begin
    for (int i = 0; i < H; i++) begin
      key_out[i] = v[i][W-1:TAG_W];
      tag_out[i] = v[i][TAG_W-1:0];
    end
  end

endmodule
