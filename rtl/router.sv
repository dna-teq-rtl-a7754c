// router: 5-port router of the 2D mesh that links the tiles.
//
// Ports 0..4 = north, east, south, west, local (the tile's memory controller).
// Every packet is a single flit (flit_t): destination tile, destination word
// address and one data word, i.e. one remote vault write. Each input port has
// a 2-entry FIFO; its head flit is routed in dimension order, first along x
// (east when dst_x > MY_X), then along y (south when dst_y > MY_Y), and
// leaves on the local port at its destination. Each output grants one input
// per cycle, round-robin. valid/ready on all ports; input ready only depends on
// FIFO occupancy, so chains of routers have no combinational loop. y grows
// southwards. The source only states that routers connect PEs and vaults
// through a 2D mesh; routing, buffering and arbitration are this design's.
module router
  import dnateq_pkg::*;
#(
  parameter int MY_X = 0,
  parameter int MY_Y = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid  [5],
  output logic  in_ready  [5],
  input  flit_t in_flit   [5],
  output logic  out_valid [5],
  input  logic  out_ready [5],
  output flit_t out_flit  [5]
);
  localparam int P_N = 0, P_E = 1, P_S = 2, P_W = 3, P_L = 4;

  flit_t      q     [5][2];
  logic [1:0] cnt   [5];
  logic [2:0] route [5];
  logic [4:0] gnt   [5];   // gnt[o][i]
  logic [2:0] rr    [5];   // round-robin pointer per output
  logic       pop   [5];

  function automatic logic [2:0] xy_route(input flit_t f);
    if (int'(f.dst_x) > MY_X)      return 3'(P_E);
    else if (int'(f.dst_x) < MY_X) return 3'(P_W);
    else if (int'(f.dst_y) > MY_Y) return 3'(P_S);
    else if (int'(f.dst_y) < MY_Y) return 3'(P_N);
    else                           return 3'(P_L);
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      in_ready[i] = (cnt[i] != 2'd2);
      route[i]    = xy_route(q[i][0]);
      pop[i]      = 1'b0;
    end
    for (int o = 0; o < 5; o++) begin
      gnt[o]       = '0;
      out_valid[o] = 1'b0;
      out_flit[o]  = '0;
      for (int k = 4; k >= 0; k--) begin
        int i;
        i = (int'(rr[o]) + k) % 5;
        if (cnt[i] != 2'd0 && route[i] == 3'(o)) begin
          gnt[o]       = 5'b00001 << i;
        end
      end
      for (int i = 0; i < 5; i++) begin
        if (gnt[o][i]) begin
          out_valid[o] = 1'b1;
          out_flit[o]  = q[i][0];
          pop[i]       = out_ready[o];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        cnt[i]  <= '0;
        rr[i]   <= '0;
        q[i][0] <= '0;
        q[i][1] <= '0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        logic push;
        push = in_valid[i] && in_ready[i];
        unique case ({push, pop[i]})
          2'b10: begin
            q[i][cnt[i][0]] <= in_flit[i];
            cnt[i] <= cnt[i] + 2'd1;
          end
          2'b01: begin
            q[i][0] <= q[i][1];
            cnt[i]  <= cnt[i] - 2'd1;
          end
          2'b11: begin
            if (cnt[i] == 2'd1) q[i][0] <= in_flit[i];
            else begin
              q[i][0] <= q[i][1];
              q[i][1] <= in_flit[i];
            end
          end
          default: ;
        endcase
      end
      for (int o = 0; o < 5; o++) begin
        for (int i = 0; i < 5; i++)
          if (gnt[o][i] && out_ready[o]) rr[o] <= 3'((i + 1) % 5);
      end
    end
  end
endmodule
