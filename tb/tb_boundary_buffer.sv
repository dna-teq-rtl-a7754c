// tb_boundary_buffer: writes all 128 boundaries, reads back every row with
// its one-cycle latency and checks the row power-gate mask.
`timescale 1ns/1ps
module tb_boundary_buffer;
  localparam int WATCHDOG = 10000;
  `include "tb_check.svh"
  logic [2:0] nbits = 3'd5;
  logic wr_en = 0, rd_en = 0;
  logic [6:0] wr_addr = 0;
  logic [15:0] wr_data = 0;
  logic [3:0] rd_row = 0;
  logic [127:0] rd_data;
  logic [15:0] rows_pg;
  logic [15:0] model [128];
  boundary_buffer dut (.*);
  initial begin
    for (int k = 0; k < 128; k++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 7'(k); wr_data = 16'($urandom); model[k] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int r = 15; r >= 0; r--) begin
      rd_en = 1; rd_row = 4'(r);
      @(negedge clk);
      rd_en = 0;
      for (int j = 0; j < 8; j++) check(rd_data[16*j +: 16] == model[8*r + j], $sformatf("row %0d slot %0d", r, j));
    end
    check(rows_pg == 16'hfff0, "power-gate mask n=5");
    finish();
  end
endmodule
