// tb_counter_set: random counting steps with n = 4 into one counter set;
// checks every AC1/AC2/AC3 entry and the sign accumulator against
// independently computed counts, zero-code skipping and term disabling.
`timescale 1ns/1ps
module tb_counter_set;
  import dnateq_pkg::*;
  localparam int WATCHDOG = 20000;
  `include "tb_check.svh"
  logic rst_n = 0, step = 0, rd_en = 0, busy;
  logic [2:0] nbits = 3'd4;
  logic [3:0] term_en = 4'hf;
  qval_t a, w;
  cs_sel_e rd_sel = SEL_ACC;
  logic [7:0] rd_idx = 0;
  logic [15:0] rd_data;
  int c1 [256], c2 [128], c3 [128], c4;

  counter_set dut (.*);

  task automatic rd(input cs_sel_e s, input int i, output int v);
    @(negedge clk);
    rd_en = 1; rd_sel = s; rd_idx = 8'(i);
    @(negedge clk);
    rd_en = 0;
    v = int'(signed'(rd_data));
  endtask

  task automatic run(input logic [3:0] ten, input int nsteps);
    int v;
    term_en = ten;
    for (int i = 0; i < 256; i++) c1[i] = 0;
    for (int i = 0; i < 128; i++) begin c2[i] = 0; c3[i] = 0; end
    c4 = 0;
    for (int k = 0; k < nsteps; k++) begin
      int ea, ew, d;
      @(negedge clk);
      ea = $urandom_range(0, 15) - 8;   // -8 is the zero code for n = 4
      ew = $urandom_range(0, 15) - 8;
      a = '{s: 1'($urandom_range(0, 1)), e: 7'(ea)};
      w = '{s: 1'($urandom_range(0, 1)), e: 7'(ew)};
      step = 1;
      if (ea != -8 && ew != -8) begin
        d = (a.s ^ w.s) ? -1 : 1;
        if (ten[0]) c1[ea + ew + 16] += d;
        if (ten[1]) c2[ew + 8] += d;
        if (ten[2]) c3[ea + 8] += d;
        if (ten[3]) c4 += d;
      end
    end
    @(negedge clk); step = 0;
    for (int i = 0; i < 32; i++) begin rd(SEL_AC1, i, v); check(v == c1[i], $sformatf("AC1[%0d] %0d/%0d", i, v, c1[i])); end
    for (int i = 0; i < 16; i++) begin rd(SEL_AC2, i, v); check(v == c2[i], $sformatf("AC2[%0d] %0d/%0d", i, v, c2[i])); end
    for (int i = 0; i < 16; i++) begin rd(SEL_AC3, i, v); check(v == c3[i], $sformatf("AC3[%0d] %0d/%0d", i, v, c3[i])); end
    rd(SEL_ACC, 0, v); check(v == c4, $sformatf("Acc %0d/%0d", v, c4));
  endtask

  initial begin
    a = '0; w = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (busy) @(negedge clk);
    run(4'hf, 100);
    run(4'b0101, 100);
    finish();
  end
endmodule
