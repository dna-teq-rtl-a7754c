// tb_output_buffer: pushes result pairs with random back-pressure; checks word
// packing (O_i low), order and that no word is lost or duplicated.
`timescale 1ns/1ps
module tb_output_buffer;
  localparam int WATCHDOG = 20000;
  `include "tb_check.svh"
  logic rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] o_lo = 0, o_hi = 0;
  logic [31:0] out_data;
  logic [31:0] q [$];
  int sent = 0, got = 0;
  output_buffer dut (.*);
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (got < 200) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0);
      in_valid  = (sent < 200) && ($urandom_range(0, 1) == 1);
      o_lo = 16'($urandom); o_hi = 16'($urandom);
      #1;
      if (out_valid && out_ready) begin
        check(q.size() > 0 && out_data == q[0], "order/packing");
        void'(q.pop_front());
        got++;
      end
      if (in_valid && in_ready) begin q.push_back({o_hi, o_lo}); sent++; end
    end
    check(q.size() == 0, "nothing left over");
    finish();
  end
endmodule
