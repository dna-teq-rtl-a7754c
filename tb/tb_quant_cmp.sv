// tb_quant_cmp: random magnitudes against random sorted rows; checks the
// comparison vector, hit flag and leading-one position.
`timescale 1ns/1ps
module tb_quant_cmp;
  localparam int WATCHDOG = 10000;
  `include "tb_check.svh"
  logic [14:0] mag;
  logic [127:0] row;
  logic [7:0] lt;
  logic hit;
  logic [2:0] pos;
  quant_cmp dut (.*);
  initial begin
    for (int k = 0; k < 500; k++) begin
      logic [14:0] b [8];
      int ep;
      b[0] = 15'($urandom_range(0, 2000));
      for (int j = 1; j < 8; j++) b[j] = b[j-1] + 15'($urandom_range(0, 2000));
      for (int j = 0; j < 8; j++) row[16*j +: 16] = {1'b0, b[j]};
      mag = 15'($urandom_range(0, 17000));
      #1;
      ep = -1;
      for (int j = 7; j >= 0; j--) if (mag < b[j]) ep = j;
      check(hit == (ep >= 0), "hit");
      if (ep >= 0) check(pos == 3'(ep), $sformatf("pos %0d exp %0d", pos, ep));
      for (int j = 0; j < 8; j++) check(lt[j] == (mag < b[j]), "lt bit");
    end
    finish();
  end
endmodule
