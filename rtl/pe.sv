// pe: processing element of the exponential dot-product accelerator.
//
// Computes 16 output neurons at a time in three stages:
//  1. Pre-processing: the quantizer maps each batch of 8 FP16 activations to
//     {sign, exponent} bytes and loads them into the input shift register; the
//     weight buffer gathers the 16 pre-quantized weights of each input.
//  2. Counting: every step one activation is broadcast to the 16 counter sets,
//     each of which pairs it with its own weight and counts exponent
//     occurrences (no multiplications).
//  3. Post-processing: two dequantizers turn the counts of counter sets j and
//     j+8 into FP16 outputs, using the shared BLUT (powers of b) and scale
//     register (term coefficients); the output buffer packs both into a word.
//
// Interfaces: in_* is the word stream from the memory controller (format in
// pe_ctrl), out_* the result stream (8 words, word j = {O_j+8, O_j}). Layer
// configuration through cfg_*: address 0x000-0x07F boundaries, 0x100-0x1FF
// BLUT, 0x200-0x203 scale coefficients, 0x300 n (exponent bits, 3..7),
// 0x301 number of 8-input batches, 0x302 term enables (bit k-1 = term k).
// The three stages and the counts of units follow the source; the stream
// format and configuration map are this design's.
module pe
  import dnateq_pkg::*;
#(
  parameter int N_CS_P = dnateq_pkg::N_CS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [9:0]  cfg_addr,
  input  logic [15:0] cfg_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic [15:0] pg_banks   // power-gate request for unused buffer banks
);
  localparam int HALF = N_CS_P / 2;

  // ------------------------------------------------------ configuration ---
  logic [2:0]  nbits;
  logic [15:0] n_batches;
  logic [3:0]  term_en;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      nbits     <= 3'd3;
      n_batches <= 16'd1;
      term_en   <= 4'hf;
    end else if (cfg_we && cfg_addr[9:8] == 2'd3) begin
      unique case (cfg_addr[1:0])
        2'd0:    nbits     <= cfg_data[2:0];
        2'd1:    n_batches <= cfg_data;
        default: term_en   <= cfg_data[3:0];
      endcase
    end
  end

  // ---------------------------------------------------- pre-processing ---
  logic        q_valid, q_ready, wb_valid, wb_ready;
  logic        qo_valid, qo_ready;
  logic [63:0] qo_data;
  logic        act_valid, w_full, step;
  qval_t       act;
  qval_t       w [N_CS_P];

  quantizer u_quant (
    .clk, .rst_n, .nbits,
    .din_valid(q_valid), .din_ready(q_ready), .din(in_data),
    .bnd_wr_en(cfg_we && cfg_addr[9:7] == 3'b000), .bnd_wr_addr(cfg_addr[6:0]), .bnd_wr_data(cfg_data),
    .dout_valid(qo_valid), .dout_ready(qo_ready), .dout(qo_data), .rows_pg(pg_banks));

  input_shift_reg u_isr (
    .clk, .rst_n, .load_valid(qo_valid), .load_ready(qo_ready), .load_data(qo_data),
    .head_valid(act_valid), .head(act), .pop(step));

  weight_buffer #(.N(N_CS_P)) u_wbuf (
    .clk, .rst_n, .din_valid(wb_valid), .din_ready(wb_ready), .din(in_data),
    .full(w_full), .w(w), .pop(step));

  // ---------------------------------------------------------- counting ---
  logic        cs_rd_en  [N_CS_P];
  cs_sel_e     dq_sel    [2];
  logic [7:0]  dq_idx    [2];
  logic        dq_rd_en  [2];
  logic [15:0] cs_rd     [N_CS_P];
  logic [N_CS_P-1:0] cs_bsy;
  logic [2:0]  cs_pair;

  for (genvar i = 0; i < N_CS_P; i++) begin : g_cs
    localparam int D = i / HALF;
    assign cs_rd_en[i] = dq_rd_en[D] && (3'(i % HALF) == cs_pair);
    counter_set u_cs (
      .clk, .rst_n, .nbits, .term_en, .step, .a(act), .w(w[i]),
      .rd_en(cs_rd_en[i]), .rd_sel(dq_sel[D]), .rd_idx(dq_idx[D]),
      .rd_data(cs_rd[i]), .busy(cs_bsy[i]));
  end

  // --------------------------------------------------- post-processing ---
  logic        dq_start, ob_valid, ob_ready;
  logic [1:0]  dq_done;
  logic [15:0] dq_res  [2];
  logic [7:0]  blut_idx [2];
  logic [15:0] blut_dat [2];
  logic [15:0] scale [4];

  dq_tables u_tab (
    .clk, .wr_en(cfg_we && cfg_addr[9:8] inside {2'd1, 2'd2}),
    .wr_addr({cfg_addr[9], cfg_addr[7:0]}), .wr_data(cfg_data),
    .rd_idx(blut_idx), .rd_data(blut_dat), .scale(scale));

  for (genvar d = 0; d < 2; d++) begin : g_dq
    logic [15:0] sel_cnt;
    // CS -> dequantizer multiplexer (counter set d*8 + cs_pair)
    assign sel_cnt = cs_rd[d*HALF + int'(cs_pair)];
    dequantizer u_dq (
      .clk, .rst_n, .nbits, .term_en, .start(dq_start), .busy(), .done(dq_done[d]),
      .result(dq_res[d]), .rd_en(dq_rd_en[d]), .rd_sel(dq_sel[d]), .rd_idx(dq_idx[d]),
      .rd_data(sel_cnt), .blut_idx(blut_idx[d]), .blut_data(blut_dat[d]), .scale(scale));
  end

  output_buffer u_obuf (
    .clk, .rst_n, .in_valid(ob_valid), .in_ready(ob_ready), .o_lo(dq_res[0]), .o_hi(dq_res[1]),
    .out_valid, .out_ready, .out_data);

  pe_ctrl u_ctrl (
    .clk, .rst_n, .n_batches, .start, .busy, .done, .cs_busy(|cs_bsy),
    .in_valid, .in_ready, .q_valid, .q_ready, .wb_valid, .wb_ready,
    .act_valid, .w_full, .step,
    .cs_pair, .dq_start, .dq_done(&dq_done), .ob_ready, .ob_valid);

endmodule
