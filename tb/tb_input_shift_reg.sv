// tb_input_shift_reg: loads batches and pops them with random gaps; checks
// order, valid flags and that a new batch is refused until the old one is out.
`timescale 1ns/1ps
module tb_input_shift_reg;
  import dnateq_pkg::*;
  localparam int WATCHDOG = 20000;
  `include "tb_check.svh"
  logic rst_n = 0, load_valid = 0, load_ready, head_valid, pop = 0;
  logic [63:0] load_data = 0;
  qval_t head;
  input_shift_reg dut (.*);
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 20; b++) begin
      logic [63:0] d;
      d = {$urandom, $urandom};
      @(negedge clk);
      check(load_ready && !head_valid, "empty before load");
      load_valid = 1; load_data = d;
      @(negedge clk); load_valid = 0;
      for (int k = 0; k < 8; k++) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        check(head_valid && !load_ready, "valid while holding");
        check(head == qval_t'(d[8*k +: 8]), $sformatf("entry %0d", k));
        pop = 1;
        @(negedge clk); pop = 0;
      end
    end
    finish();
  end
endmodule
