// tb_quantizer: quantizes random FP16 activation batches for every exponent
// width n = 3..7 against a boundary-search model (zero code below the first
// boundary, clipping above the last) and checks the latency
// cycles from the fourth word (2^(n-3) + 2) to dout_valid.
`timescale 1ns/1ps
module tb_quantizer;
  import tb_ref_pkg::*;
  localparam int WATCHDOG = 50000;
  `include "tb_check.svh"
  logic rst_n = 0;
  logic [2:0] nbits = 3'd3;
  logic din_valid = 0, din_ready, bnd_wr_en = 0, dout_valid, dout_ready = 0;
  logic [31:0] din = 0;
  logic [6:0] bnd_wr_addr = 0;
  logic [15:0] bnd_wr_data = 0;
  logic [63:0] dout;
  logic [15:0] rows_pg;
  quantizer dut (.*);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 3; n <= 7; n++) begin
      job_t j;
      j = new(n, 4, 4'hf, 100 + n);
      nbits = 3'(n);
      for (int k = 0; k < 128; k++) begin
        @(negedge clk);
        bnd_wr_en = 1; bnd_wr_addr = 7'(k); bnd_wr_data = j.bnd[k];
      end
      @(negedge clk); bnd_wr_en = 0;
      for (int bt = 0; bt < 4; bt++) begin
        int lat;
        for (int w = 0; w < 4; w++) begin
          @(negedge clk);
          din_valid = 1; din = {j.act[8*bt + 2*w + 1], j.act[8*bt + 2*w]};
          check(din_ready, "din_ready while loading");
        end
        @(negedge clk); din_valid = 0;
        lat = 0;  // counts clock edges after the one that accepted the fourth word
        while (!dout_valid) begin @(negedge clk); lat++; end
        check(lat == (1 << (n - 3)) + 2, $sformatf("n=%0d latency %0d", n, lat));
        for (int k = 0; k < 8; k++)
          check(dout[8*k +: 8] == j.aq[8*bt + k], $sformatf("n=%0d act %h got %h exp %h", n, j.act[8*bt+k], dout[8*k +: 8], j.aq[8*bt + k]));
        dout_ready = 1;
        @(negedge clk); dout_ready = 0;
      end
    end
    finish();
  end
endmodule
