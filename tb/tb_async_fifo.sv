// tb_async_fifo: random traffic between two unrelated clocks (10 ns and 7 ns)
// with random stalls on both sides; checks order and completeness, and that
// the FIFO reports full at its depth.
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int WATCHDOG = 20000;
  `include "tb_check.svh"
  logic rclk = 0;
  always #3.5 rclk = ~rclk;
  logic rst_n = 0, wvalid = 0, wready, rvalid, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] q [$];
  int sent = 0, got = 0, full_seen = 0;
  async_fifo dut (.wclk(clk), .wrst_n(rst_n), .wvalid, .wready, .wdata,
                  .rclk, .rrst_n(rst_n), .rvalid, .rready, .rdata);
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill without reading: full after DEPTH entries
    for (int k = 0; k < 10; k++) begin
      @(negedge clk);
      wvalid = 1; wdata = 32'(k);
      #1 if (wready) begin q.push_back(wdata); sent++; end else full_seen++;
    end
    check(sent == 8, $sformatf("full after %0d entries", sent));
    fork
      while (sent < 500) begin
        @(negedge clk);
        wvalid = ($urandom_range(0, 1) == 1); wdata = $urandom;
        #1 if (wvalid && wready) begin q.push_back(wdata); sent++; end
      end
      while (got < 500) begin
        @(negedge rclk);
        rready = ($urandom_range(0, 2) != 0);
        #1 if (rvalid && rready) begin
          check(q.size() > 0 && rdata == q[0], $sformatf("word %0d", got));
          void'(q.pop_front());
          got++;
        end
      end
    join
    wvalid = 0;
    finish();
  end
endmodule
