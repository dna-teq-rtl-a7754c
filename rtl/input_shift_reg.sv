// input_shift_reg: the Input Shift-Reg between quantizer and counter sets.
//
// Loads the 8 quantized activations of one batch at once (64-bit word from the
// quantizer, byte k = activation k) and shifts them out one per counting step,
// activation 0 first; the head entry is broadcast to all counter sets.
// Interface: load side valid/ready (ready only when empty, so a new batch is
// taken the cycle after the last entry left), head side valid/pop.
// The 8-entry register and one-per-cycle broadcast follow the source; the
// handshake is this design's choice.
module input_shift_reg
  import dnateq_pkg::*;
#(
  parameter int DEPTH = dnateq_pkg::N_ACT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load_valid,
  output logic              load_ready,
  input  logic [8*DEPTH-1:0] load_data,
  output logic              head_valid,
  output qval_t             head,
  input  logic              pop
);
  logic [8*DEPTH-1:0]       sr;
  logic [$clog2(DEPTH):0]   cnt;

  assign load_ready = (cnt == '0);
  assign head_valid = (cnt != '0);
  assign head       = qval_t'(sr[7:0]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sr  <= '0;
      cnt <= '0;
    end else if (load_valid && load_ready) begin
      sr  <= load_data;
      cnt <= ($clog2(DEPTH)+1)'(DEPTH);
    end else if (pop && head_valid) begin
      sr  <= {8'h00, sr[8*DEPTH-1:8]};
      cnt <= cnt - 1'b1;
    end
  end

  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);
endmodule
