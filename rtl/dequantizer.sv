// dequantizer: turns the counts of one counter set into an FP16 output
// activation (post-processing).
//
// For each enabled term k of the exponential dot product it reads every entry
// of the term's table from the counter set, multiplies the count by the
// matching power of b from the BLUT and accumulates the products in FP16:
//   term 1: AC1 entry i (0 .. 2^(n+1)-1) times BLUT[i]            = b^(i-2^n)
//   term 2: AC2 entry i (0 .. 2^n-1)     times BLUT[i + 2^(n-1)]  = b^(i-2^(n-1))
//   term 3: AC3 entry i, as term 2
//   term 4: the sign-product accumulator, converted to FP16.
// The term sum is then multiplied by the term's coefficient from the scale
// register and added to the output. One FP16 multiplier serves both steps
// through two operand muxes (BLUT or scale, count or term sum), as in the source;
// one FP16 adder accumulates either the term sum or the output.
//
// Timing: start is taken in the cycle it is seen with the unit idle; a term with
// a table of L entries takes L + 2 cycles (L reads, the last read's data, the
// scale step) and term 4 takes 3; done pulses with result valid one cycle after
// the last term. Counter-set reads (rd_en, rd_sel, rd_idx) return rd_data one
// cycle later. FP16 rounding is to nearest even with subnormals flushed to zero
// (this design's choice).
module dequantizer
  import dnateq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  nbits,
  input  logic [3:0]  term_en,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic [15:0] result,
  // counter-set read port
  output logic        rd_en,
  output cs_sel_e     rd_sel,
  output logic [7:0]  rd_idx,
  input  logic [15:0] rd_data,
  // shared tables
  output logic [7:0]  blut_idx,
  input  logic [15:0] blut_data,
  input  logic [15:0] scale [4]
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_SCALE, S_DONE} state_e;
  state_e      state;
  logic [2:0]  term;      // 1..4
  logic [8:0]  icnt;      // reads issued in this term
  logic [8:0]  len;       // entries of this term
  logic        pv;        // read data valid this cycle
  logic [7:0]  pidx;      // index of the returning data
  logic [15:0] tacc;      // term accumulator
  logic [15:0] oacc;      // output accumulator
  logic [7:0]  half;

  assign half = 8'd1 << (nbits - 3'd1);

  always_comb begin
    unique case (term)
      3'd1:    len = 9'd1 << (4'(nbits) + 4'd1);
      3'd2,
      3'd3:    len = 9'd1 << nbits;
      default: len = 9'd1;
    endcase
  end

  // First enabled term after 'cur' (5 = none left)
  function automatic logic [2:0] next_term(input logic [2:0] cur, input logic [3:0] en);
    logic [2:0] nt;
    nt = 3'd5;
    for (int k = 4; k >= 1; k--) if (en[k-1] && 3'(k) > cur) nt = 3'(k);
    return nt;
  endfunction

  // Multiplier operand muxes
  logic [15:0] mul_a, mul_b, prod, add_a, add_b, sum;
  logic        scale_phase;
  assign scale_phase = (state == S_SCALE);
  assign blut_idx    = (term == 3'd1) ? pidx : pidx + half;
  assign mul_a       = scale_phase ? scale[2'(term - 3'd1)] : blut_data;
  assign mul_b       = scale_phase ? tacc : int16_to_fp16(rd_data);
  assign prod        = fp16_mul(mul_a, mul_b);
  assign add_a       = scale_phase ? oacc : tacc;
  assign add_b       = prod;
  assign sum         = fp16_add(add_a, add_b);

  assign rd_en  = (state == S_ISSUE) && (icnt < len);
  assign rd_sel = cs_sel_e'((term == 3'd4) ? 2'd0 : term[1:0]);
  assign rd_idx = icnt[7:0];
  assign busy   = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      term   <= 3'd1;
      icnt   <= '0;
      pv     <= 1'b0;
      pidx   <= '0;
      tacc   <= '0;
      oacc   <= '0;
      done   <= 1'b0;
      result <= '0;
    end else begin
      done <= 1'b0;
      pv   <= rd_en;
      pidx <= rd_idx;
      unique case (state)
        S_IDLE: if (start) begin
          oacc <= '0;
          tacc <= '0;
          icnt <= '0;
          term <= next_term(3'd0, term_en);
          state <= (next_term(3'd0, term_en) == 3'd5) ? S_DONE : S_ISSUE;
        end
        S_ISSUE: begin
          if (rd_en) icnt <= icnt + 9'd1;
          if (pv) begin
            if (term == 3'd4) tacc <= int16_to_fp16(rd_data);
            else              tacc <= sum;
          end
          if (pv && icnt == len) state <= S_SCALE;
        end
        S_SCALE: begin
          oacc <= sum;
          tacc <= '0;
          icnt <= '0;
          term <= next_term(term, term_en);
          state <= (next_term(term, term_en) == 3'd5) ? S_DONE : S_ISSUE;
        end
        S_DONE: begin
          done   <= 1'b1;
          result <= oacc;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
