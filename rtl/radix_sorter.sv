// radix_sorter: single-cycle all-pairs ("radix-n") sorter.
//
// Every pair of the NIN inputs is compared at once. The rank of an entry is
// the number of entries that precede it, where entry d precedes entry c when
// key_d < key_c, or when the keys are equal and d < c (input position breaks
// ties, so every rank is unique). Output slot k then takes the entry whose
// rank is k, through a one-hot AND-OR selection. Only the first NOUT ranks
// are produced, so the block returns the NOUT smallest entries in ascending
// key order.
//
// In the list management unit it is used twice, as in sorter Design 3:
//   * radix-2L metric stage: NIN = 2L, NOUT = L, key = path metric,
//     tag = candidate index;
//   * radix-L index stage:   NIN = NOUT = L, key = candidate index,
//     tag = path metric.
// The all-pairs structure follows the cited radix-2L sorter; its exact gate
// level is not specified, so the AND-OR output selection is this design's
// own choice. Purely combinational: outputs follow the inputs in the same
// cycle, no clock and no handshake.
module radix_sorter #(
  parameter int unsigned NIN   = 16,
  parameter int unsigned NOUT  = 8,
  parameter int unsigned KEY_W = 10,
  parameter int unsigned TAG_W = 4
) (
  input  logic [KEY_W-1:0] key_in  [NIN],
  input  logic [TAG_W-1:0] tag_in  [NIN],
  output logic [KEY_W-1:0] key_out [NOUT],
  output logic [TAG_W-1:0] tag_out [NOUT]
);

  localparam int unsigned RANK_W = (NIN > 1) ? $clog2(NIN) : 1;

  logic [NIN-1:0]    prec [NIN];  // prec[c][d]: entry d precedes entry c
  logic [RANK_W-1:0] rank   [NIN];

  always_comb begin
    for (int c = 0; c < NIN; c++) begin
      for (int d = 0; d < NIN; d++) begin
        if (d == c) prec[c][d] = 1'b0;
        else if (d < c) prec[c][d] = (key_in[d] <= key_in[c]);
        else prec[c][d] = (key_in[d] < key_in[c]);
      end
    end
  end

  always_comb begin
    for (int c = 0; c < NIN; c++) begin
      rank[c] = '0;
      for (int d = 0; d < NIN; d++) rank[c] += RANK_W'(prec[c][d]);
    end
  end

  always_comb begin
    for (int k = 0; k < NOUT; k++) begin
      key_out[k] = '0;
      tag_out[k] = '0;
      for (int c = 0; c < NIN; c++) begin
        if (rank[c] == RANK_W'(k)) begin
          key_out[k] |= key_in[c];
          tag_out[k] |= tag_in[c];
        end
      end
    end
  end

endmodule
