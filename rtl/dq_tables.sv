// dq_tables: Base Lookup Table (BLUT) and Scale Register shared by the two
// dequantizers.
//
// BLUT entry i holds the FP16 value b^(i - 2^n) for the current layer, i in
// 0 .. 2^(n+1)-1, so it covers every exponent sum a counter can hold. The scale
// register holds the four FP16 term coefficients: 0: alpha_A*alpha_W,
// 1: alpha_W*beta_A, 2: alpha_A*beta_W, 3: beta_A*beta_W. Both are written by
// the host per layer (wr_en, wr_addr: 0..255 BLUT, 256..259 scale). Two
// combinational read ports serve the two dequantizers.
// The BLUT size 2^(n+1) and the sharing follow the source; the entry layout
// and write port are this design's choices.
module dq_tables #(
  parameter int BLUT_DEPTH = 256,
  parameter int N_RD = 2
) (
  input  logic        clk,
  input  logic        wr_en,
  input  logic [8:0]  wr_addr,
  input  logic [15:0] wr_data,
  input  logic [7:0]  rd_idx  [N_RD],
  output logic [15:0] rd_data [N_RD],
  output logic [15:0] scale   [4]
);
  logic [15:0] blut [BLUT_DEPTH];
  logic [15:0] sreg [4];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_addr[8]) sreg[wr_addr[1:0]] <= wr_data;
      else            blut[wr_addr[7:0]] <= wr_data;
    end
  end

  always_comb begin
    for (int p = 0; p < N_RD; p++) rd_data[p] = blut[rd_idx[p]];
    for (int t = 0; t < 4; t++) scale[t] = sreg[t];
  end
endmodule
