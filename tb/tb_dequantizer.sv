// tb_dequantizer: drives one dequantizer with a modelled counter set (random
// 8-bit counts, 16-bit sign accumulator) and BLUT, for several exponent widths
// and term selections; compares the FP16 result with a real-arithmetic
// reference that rounds after every operation in the same order, and checks
// the latency 2 + sum over enabled terms of (table length + 2).
`timescale 1ns/1ps
module tb_dequantizer;
  import dnateq_pkg::*;
  import tb_ref_pkg::*;
  localparam int WATCHDOG = 100000;
  `include "tb_check.svh"
  logic rst_n = 0, start = 0, busy, done, rd_en;
  logic [2:0] nbits = 3'd3;
  logic [3:0] term_en = 4'hf;
  logic [15:0] result, rd_data, blut_data;
  cs_sel_e rd_sel;
  logic [7:0] rd_idx, blut_idx;
  logic [15:0] scale [4];
  logic [15:0] blut [256];
  logic signed [7:0] c [4][256];
  logic signed [15:0] acc;

  dequantizer dut (.*);

  assign blut_data = blut[blut_idx];
  always @(posedge clk) if (rd_en)
    rd_data <= (rd_sel == SEL_ACC) ? acc : 16'(c[int'(rd_sel)][rd_idx]);

  task automatic one(input int n, input logic [3:0] ten);
    logic [15:0] o, t;
    int half, lat, exp_lat;
    nbits = 3'(n); term_en = ten;
    half = 1 << (n - 1);
    for (int i = 0; i < 256; i++) begin
      blut[i] = real_to_fp16((2.0 ** (4.0 * real'(i - (1 << n)) / real'(1 << n))) * (($urandom_range(0, 1) == 1) ? 1.0 : 0.75));
      for (int s = 1; s < 4; s++) c[s][i] = 8'($urandom_range(0, 60) - 30);  // keeps sums in FP16 range
    end
    acc = 16'($urandom_range(0, 4000) - 2000);
    for (int s = 0; s < 4; s++) scale[s] = real_to_fp16(real'($urandom_range(1, 200)) / 64.0 - 1.5);
    o = 0; exp_lat = 2;
    for (int s = 1; s <= 3; s++) if (ten[s-1]) begin
      int len;
      len = (s == 1) ? (2 << n) : (1 << n);
      exp_lat += len + 2;
      t = 0;
      for (int k = 0; k < len; k++) t = radd(t, rmul(rint(int'(c[s][k])), blut[(s == 1) ? k : k + half]));
      o = radd(o, rmul(scale[s-1], t));
    end
    if (ten[3]) begin
      exp_lat += 3;
      o = radd(o, rmul(scale[3], rint(int'(acc))));
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    check(result == o, $sformatf("n=%0d terms=%b got %h exp %h", n, ten, result, o));
    check(lat == exp_lat, $sformatf("n=%0d terms=%b latency %0d exp %0d", n, ten, lat, exp_lat));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 3; n <= 7; n++) begin
      one(n, 4'hf);
      one(n, 4'b0101);
      one(n, 4'b1000);
    end
    for (int r = 0; r < 10; r++) one($urandom_range(3, 7), 4'($urandom_range(1, 15)));
    finish();
  end
endmodule
