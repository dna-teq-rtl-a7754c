// tb_array_counter: random up/down counting into an AC1-sized array counter,
// checked against a model with 8-bit wrap-around; read-out values, clear on
// read, one-cycle read latency and the bank power-gate mask per n.
`timescale 1ns/1ps
module tb_array_counter;
  localparam int WATCHDOG = 20000;
  `include "tb_check.svh"
  logic rst_n = 0, inc_en = 0, down = 0, rd_en = 0, busy;
  logic [2:0] nbits = 3'd7;
  logic [7:0] inc_idx = 0, rd_idx = 0, rd_data;
  logic [15:0] bank_pg;
  logic [7:0] model [256];

  array_counter #(.DEPTH(256)) dut (.*);

  initial begin
    for (int i = 0; i < 256; i++) model[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (busy) @(negedge clk);
    for (int n = 3; n <= 7; n++) begin
      nbits = 3'(n); #1;
      check(bank_pg == 16'(~((32'd1 << (1 << (n - 3))) - 1)), $sformatf("bank mask n=%0d %h", n, bank_pg));
    end
    // counting: hot entries to force wrap-around
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      inc_en = 1;
      inc_idx = ($urandom_range(0, 3) == 0) ? 8'd17 : 8'($urandom_range(0, 255));
      down = ($urandom_range(0, 9) < 3);
      model[inc_idx] = model[inc_idx] + (down ? 8'hff : 8'h01);
    end
    @(negedge clk); inc_en = 0;
    for (int i = 0; i < 256; i++) begin
      rd_en = 1; rd_idx = 8'(i);
      @(negedge clk);
      rd_en = 0;
      check(rd_data == model[i], $sformatf("entry %0d got %0d exp %0d", i, rd_data, model[i]));
    end
    // cleared on read
    for (int i = 0; i < 256; i += 17) begin
      rd_en = 1; rd_idx = 8'(i);
      @(negedge clk);
      rd_en = 0;
      check(rd_data == 0, $sformatf("entry %0d not cleared", i));
    end
    finish();
  end
endmodule
