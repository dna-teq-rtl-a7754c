// quant_cmp: one CMP module of the quantizer (8 comparators and the encoder).
//
// Compares the magnitude of one FP16 activation with the 8 boundaries of one
// boundary row. Bit j of the comparison vector is |A| < boundary[j]. Because the
// boundaries are sorted in ascending order the vector is a run of 0s followed by
// 1s; the encoder returns the position of the first 1 (pos) and hit = 1 when the
// row holds at least one boundary above |A|.
//
// FP16 magnitudes of non-negative values order exactly like their 15-bit
// patterns, so each comparator is a plain 15-bit unsigned compare (this
// design's choice; the source shows 16-bit comparators). Purely combinational.
module quant_cmp (
  input  logic [14:0]  mag,     // |A|, FP16 without sign bit
  input  logic [127:0] row,     // 8 boundaries, boundary j in bits 16j+15:16j
  output logic [7:0]   lt,      // comparison vector
  output logic         hit,
  output logic [2:0]   pos
);
  always_comb begin
    for (int j = 0; j < 8; j++) lt[j] = mag < row[16*j +: 15];
    hit = |lt;
    pos = 3'd7;
    for (int j = 7; j >= 0; j--) if (lt[j]) pos = 3'(j);
  end
endmodule
