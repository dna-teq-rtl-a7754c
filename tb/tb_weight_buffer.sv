// tb_weight_buffer: streams weight words back to back with pops as soon as the
// buffer is full; checks the 16 weights of every step, the byte/word order and
// the rate of one step per 4 words.
`timescale 1ns/1ps
module tb_weight_buffer;
  import dnateq_pkg::*;
  localparam int WATCHDOG = 20000;
  `include "tb_check.svh"
  logic rst_n = 0, din_valid = 0, din_ready, full, pop = 0;
  logic [31:0] din = 0;
  qval_t w [16];
  logic [31:0] words [400];
  int wi = 0, steps = 0, cyc = 0, first = -1;
  weight_buffer dut (.*);
  always @(posedge clk) cyc++;
  initial begin
    for (int k = 0; k < 400; k++) words[k] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (steps < 100) begin
      @(negedge clk);
      pop = full;
      if (full) begin
        if (first < 0) first = cyc;
        for (int i = 0; i < 16; i++)
          check(w[i] == qval_t'(words[4*steps + i/4][8*(i%4) +: 8]), $sformatf("step %0d w%0d", steps, i));
        steps++;
      end
      din_valid = (wi < 400); din = words[wi];
      #1 if (din_valid && din_ready) wi++;
    end
    @(negedge clk); pop = 0; din_valid = 0;
    check(cyc - first <= 4 * 100 + 2, $sformatf("rate: %0d cycles for 100 steps", cyc - first));
    finish();
  end
endmodule
