// pe_ctrl: controller of a processing element.
//
// Runs one job: 16 output neurons over n_batches x 8 inputs.
//  * Stream steering. The PE's input words arrive per batch of 8 inputs as
//    4 activation words (two FP16 values each, to the quantizer) followed by
//    8 x 4 weight words (16 weights per input, to the weight buffer).
//    Inputs beyond the layer's width are padded by the host with zero
//    activations, which the counter sets ignore.
//  * Counting. A counting step fires whenever the input shift register has an
//    activation and the weight buffer is full; quantization of the next batch
//    overlaps with the weight words of the current one.
//  * Post-processing, after all n_batches x 8 steps: both dequantizers are
//    started together on counter sets j and j+8 (j = 0..7); their results go to
//    the output buffer as one word. A dequantizer run only starts when the
//    output buffer has room. Counting and post-processing do not overlap, as in
//    the source; the stream format is this design's choice.
// start is taken when idle and the counter sets have finished their reset
// sweep; done pulses once the 8th output word has entered the output buffer.
module pe_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] n_batches,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  logic        cs_busy,
  // input stream steering
  input  logic        in_valid,
  output logic        in_ready,
  output logic        q_valid,
  input  logic        q_ready,
  output logic        wb_valid,
  input  logic        wb_ready,
  // counting
  input  logic        act_valid,
  input  logic        w_full,
  output logic        step,
  // post-processing
  output logic [2:0]  cs_pair,
  output logic        dq_start,
  input  logic        dq_done,
  input  logic        ob_ready,
  output logic        ob_valid
);
  typedef enum logic [2:0] {S_IDLE, S_COUNT, S_POST_START, S_POST_WAIT, S_DONE} state_e;
  state_e      state;
  logic [5:0]  wc;        // word within batch, 0..35
  logic [15:0] words_b;   // batches whose words are all in
  logic [18:0] steps;     // counting steps done
  logic        feeding;

  assign feeding  = (state == S_COUNT) && (words_b != n_batches);
  assign q_valid  = feeding && in_valid && (wc < 6'd4);
  assign wb_valid = feeding && in_valid && (wc >= 6'd4);
  assign in_ready = feeding && ((wc < 6'd4) ? q_ready : wb_ready);
  assign step     = (state == S_COUNT) && act_valid && w_full;
  assign dq_start = (state == S_POST_START) && ob_ready;
  assign ob_valid = (state == S_POST_WAIT) && dq_done;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      wc      <= '0;
      words_b <= '0;
      steps   <= '0;
      cs_pair <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start && !cs_busy) begin
          wc      <= '0;
          words_b <= '0;
          steps   <= '0;
          cs_pair <= '0;
          state   <= S_COUNT;
        end
        S_COUNT: begin
          if (in_valid && in_ready) begin
            if (wc == 6'd35) begin
              wc      <= '0;
              words_b <= words_b + 16'd1;
            end else begin
              wc <= wc + 6'd1;
            end
          end
          if (step) begin
            steps <= steps + 19'd1;
            if (steps + 19'd1 == {n_batches, 3'b000}) state <= S_POST_START;
          end
        end
        S_POST_START: if (ob_ready) state <= S_POST_WAIT;
        S_POST_WAIT: if (dq_done) begin
          if (cs_pair == 3'd7) state <= S_DONE;
          else begin
            cs_pair <= cs_pair + 3'd1;
            state   <= S_POST_START;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Results are only produced when the output buffer has room
  a_ob_room: assert property (@(posedge clk) disable iff (!rst_n) ob_valid |-> ob_ready);
endmodule
