// weight_buffer: the Weight Buffer holding one weight per counter set.
//
// Collects N_CS pre-quantized weights {S_w, int_w} from 32-bit memory words,
// four 8-bit weights per word, weight 4k+j in byte j of word k. When all
// N_CS/4 words have arrived, full rises and all weights are presented in
// parallel (weight i goes to counter set i). pop empties the buffer; a word
// arriving in the same cycle as pop is already stored for the next step, so a
// continuous stream costs N_CS/4 cycles per counting step.
// The buffer and its width follow the source; storing each weight in an 8-bit
// container (instead of n+1 packed bits) is this design's simplification.
module weight_buffer
  import dnateq_pkg::*;
#(
  parameter int N = dnateq_pkg::N_CS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        din_valid,
  output logic        din_ready,
  input  logic [31:0] din,
  output logic        full,
  output qval_t       w [N],
  input  logic        pop
);
  localparam int NW = N / 4;
  logic [$clog2(NW+1)-1:0] wcnt;
  logic [7:0] buf_q [N];

  assign full      = (wcnt == ($bits(wcnt))'(NW));
  assign din_ready = !full || pop;

  always_comb for (int i = 0; i < N; i++) w[i] = qval_t'(buf_q[i]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wcnt <= '0;
      for (int i = 0; i < N; i++) buf_q[i] <= '0;
    end else begin
      logic [$clog2(NW+1)-1:0] base;
      base = (pop && full) ? '0 : wcnt;
      if (din_valid && din_ready) begin
        for (int j = 0; j < 4; j++) buf_q[4*base + j] <= din[8*j +: 8];
        wcnt <= base + 1'b1;
      end else begin
        wcnt <= base;
      end
    end
  end

  a_pop_full: assert property (@(posedge clk) disable iff (!rst_n) pop |-> full);
endmodule
