// tb_pe: end-to-end test of one processing element.
//
// Runs three jobs with different exponent widths (n = 3, 5, 7) and term
// selections on the same PE: configures boundaries, BLUT, scale coefficients
// and layer registers, streams activations and weights, and compares the 16
// FP16 outputs with the reference model of tb_ref_pkg. Checks that the
// counting stage takes exactly one activation per step (8 x batches steps).
`timescale 1ns/1ps
module tb_pe;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_we = 0;
  logic [9:0]  cfg_addr = 0;
  logic [15:0] cfg_data = 0;
  logic        start = 0, busy, done;
  logic        in_valid = 0, in_ready;
  logic [31:0] in_data = 0;
  logic        out_valid, out_ready = 1;
  logic [31:0] out_data;
  logic [15:0] pg;

  int checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .start, .busy, .done,
          .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .pg_banks(pg));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic cfg(input logic [9:0] a, input logic [15:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = a; cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  int steps;
  always @(posedge clk) if (rst_n && dut.step) steps++;

  task automatic run_job(input job_t j);
    int w, got;
    logic [31:0] res [8];
    for (int k = 0; k < 128; k++) cfg(10'(k), j.bnd[k]);
    for (int k = 0; k < 256; k++) cfg(10'(256 + k), j.blut[k]);
    for (int k = 0; k < 4; k++)   cfg(10'(512 + k), j.scl[k]);
    cfg(10'h300, 16'(j.n));
    cfg(10'h301, 16'(j.nb));
    cfg(10'h302, {12'h0, j.term_en});
    check(pg == 16'(~((32'd1 << (1 << (j.n - 3))) - 1)), "power-gate mask of the boundary rows");
    steps = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    w = 0; got = 0;
    fork
      begin
        while (w < j.nwords()) begin
          bit acc;
          @(negedge clk);
          in_valid = 1; in_data = j.word(w);
          #1 acc = in_ready;
          @(posedge clk);
          if (acc) w++;
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        while (got < 8) begin
          @(posedge clk);
          if (out_valid && out_ready) begin res[got] = out_data; got++; end
        end
      end
    join
    wait (!busy);
    check(steps == 8 * j.nb, $sformatf("counting steps %0d, expected %0d", steps, 8 * j.nb));
    for (int k = 0; k < 8; k++) begin
      check(res[k][15:0] == j.out[k], $sformatf("n=%0d O%0d got %h exp %h", j.n, k, res[k][15:0], j.out[k]));
      check(res[k][31:16] == j.out[k + 8], $sformatf("n=%0d O%0d got %h exp %h", j.n, k + 8, res[k][31:16], j.out[k + 8]));
    end
  endtask

  initial begin
    job_t j;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (300) @(negedge clk);   // counter clear sweep
    j = new(3, 4, 4'hf, 11);  run_job(j);
    j = new(5, 3, 4'b0101, 12); run_job(j);
    j = new(7, 2, 4'hf, 13);  run_job(j);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
