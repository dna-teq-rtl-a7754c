// tb_dq_tables: fills BLUT and scale register and reads all entries through
// both read ports.
`timescale 1ns/1ps
module tb_dq_tables;
  localparam int WATCHDOG = 20000;
  `include "tb_check.svh"
  logic wr_en = 0;
  logic [8:0] wr_addr = 0;
  logic [15:0] wr_data = 0;
  logic [7:0] rd_idx [2];
  logic [15:0] rd_data [2];
  logic [15:0] scale [4];
  logic [15:0] m [260];
  dq_tables dut (.*);
  initial begin
    for (int k = 0; k < 260; k++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = (k < 256) ? 9'(k) : 9'(256 + k - 256); wr_data = 16'($urandom); m[k] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 256; k++) begin
      rd_idx[0] = 8'(k); rd_idx[1] = 8'(255 - k); #1;
      check(rd_data[0] == m[k] && rd_data[1] == m[255 - k], $sformatf("BLUT %0d", k));
    end
    for (int t = 0; t < 4; t++) check(scale[t] == m[256 + t], $sformatf("scale %0d", t));
    finish();
  end
endmodule
