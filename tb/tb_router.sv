// tb_router: a router at (1,1) receives random flits on all five inputs for
// random destinations in a 4 x 4 mesh, with random back-pressure on the
// outputs; checks each flit leaves on its XY-routed port, in order per
// input/output pair, and that every flit is delivered.
`timescale 1ns/1ps
module tb_router;
  import dnateq_pkg::*;
  localparam int WATCHDOG = 50000;
  `include "tb_check.svh"
  logic rst_n = 0;
  logic in_valid [5], in_ready [5], out_valid [5], out_ready [5];
  flit_t in_flit [5], out_flit [5];
  flit_t q [5][$];   // expected, per output
  int sent = 0, got = 0;
  bit acc [5] = '{default: 0};
  router #(.MY_X(1), .MY_Y(1)) dut (.*);

  function automatic int xy(input flit_t f);
    if (f.dst_x > 1) return 1;
    if (f.dst_x < 1) return 3;
    if (f.dst_y > 1) return 2;
    if (f.dst_y < 1) return 0;
    return 4;
  endfunction

  initial begin
    for (int p = 0; p < 5; p++) begin in_valid[p] = 0; in_flit[p] = '0; out_ready[p] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (got < 1000) begin
      @(negedge clk);
      for (int p = 0; p < 5; p++) begin
        out_ready[p] = ($urandom_range(0, 3) != 0);
        if (!in_valid[p] || acc[p]) begin  // previous flit was taken
          in_valid[p] = (sent < 1000) && ($urandom_range(0, 1) == 1);
          in_flit[p]  = '{dst_x: 2'($urandom), dst_y: 2'($urandom), addr: 26'(p), data: $urandom};
        end
      end
      #1;
      for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
        int hit;
        hit = -1;
        for (int k = 0; k < q[o].size(); k++)
          if (hit < 0 && q[o][k].addr == out_flit[o].addr) hit = k;
        check(hit >= 0 && q[o][hit] == out_flit[o], $sformatf("flit on port %0d", o));
        if (hit >= 0) q[o].delete(hit);
        got++;
      end
      for (int p = 0; p < 5; p++) begin
        acc[p] = in_valid[p] && in_ready[p];
        if (acc[p]) begin
          q[xy(in_flit[p])].push_back(in_flit[p]);
          sent++;
        end
      end
    end
    finish();
  end
endmodule
