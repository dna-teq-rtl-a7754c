// boundary_buffer: the quantizer's memory of interval boundaries (L0..L15).
//
// 16 rows of 8 FP16 boundaries (256 B), enough for 7-bit exponents: a layer
// with n-bit exponents uses 2^n boundaries in rows 0 .. 2^(n-3)-1, sorted in
// ascending order across rows, boundary k at row k/8, slot k%8. Boundaries are
// written one at a time (wr_en, wr_addr = k, wr_data); a whole 128-bit row is
// read per cycle (rd_en, rd_row) and appears on rd_data one clock later.
// Rows not needed by the layer (rows_pg) can be power-gated.
// The 16 x 8 x 16-bit organisation is the source's; the write port and the
// one-cycle read latency are this design's choices.
module boundary_buffer #(
  parameter int ROWS    = 16,
  parameter int PER_ROW = 8
) (
  input  logic                      clk,
  input  logic [2:0]                nbits,
  input  logic                      wr_en,
  input  logic [$clog2(ROWS*PER_ROW)-1:0] wr_addr,
  input  logic [15:0]               wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(ROWS)-1:0]   rd_row,
  output logic [16*PER_ROW-1:0]     rd_data,
  output logic [ROWS-1:0]           rows_pg
);
  localparam int SW = $clog2(PER_ROW);
  logic [15:0] mem [ROWS][PER_ROW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr[$bits(wr_addr)-1:SW]][wr_addr[SW-1:0]] <= wr_data;
    if (rd_en) for (int j = 0; j < PER_ROW; j++) rd_data[16*j +: 16] <= mem[rd_row][j];
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) rows_pg[r] = (r >= (1 << (nbits - 3'd3)));
  end
endmodule
