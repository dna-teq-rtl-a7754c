// dnateq_top: logic die of the 3D-stacked exponential-quantization accelerator.
//
// MESH_X x MESH_Y tiles (4 x 4 by default, one per vault), each a PE, a memory
// controller and a router, joined by a 2D mesh: the east port of tile (x,y)
// faces the west port of tile (x+1,y), the south port faces the north port of
// tile (x,y+1). Mesh ports on the edge of the die are tied off (no traffic
// leaves the mesh, since routing only targets tiles inside it). Tile t = y *
// MESH_X + x.
//
// Brought out per tile: the host command port of the memory controller, the
// PE's configuration/start/done signals and the vault interface; the DRAM dies
// themselves are outside this module. Two clocks: clk for the logic die and
// dram_clk for the vault side of the memory controllers.
// The 4 x 4 tile arrangement follows the source; all port formats are this
// design's.
module dnateq_top
  import dnateq_pkg::*;
#(
  parameter int MESH_X = 4,
  parameter int MESH_Y = 4,
  localparam int NT = MESH_X * MESH_Y
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              dram_clk,
  input  logic              dram_rst_n,
  input  logic              cmd_valid  [NT],
  output logic              cmd_ready  [NT],
  input  mc_cmd_t           cmd        [NT],
  output logic              mc_busy    [NT],
  input  logic              cfg_we     [NT],
  input  logic [9:0]        cfg_addr   [NT],
  input  logic [15:0]       cfg_data   [NT],
  input  logic              pe_start   [NT],
  output logic              pe_busy    [NT],
  output logic              pe_done    [NT],
  output logic [15:0]       pe_pg      [NT],
  output logic              vault_req    [NT],
  output logic              vault_we     [NT],
  output logic [ADDR_W-1:0] vault_addr   [NT],
  output logic [31:0]       vault_wdata  [NT],
  input  logic              vault_gnt    [NT],
  input  logic              vault_rvalid [NT],
  input  logic [31:0]       vault_rdata  [NT]
);
  // mesh wires, per tile and port (0 N, 1 E, 2 S, 3 W)
  logic  mi_valid [NT][4];
  logic  mi_ready [NT][4];
  flit_t mi       [NT][4];
  logic  mo_valid [NT][4];
  logic  mo_ready [NT][4];
  flit_t mo       [NT][4];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int T = y * MESH_X + x;

      // neighbour of each port, -1 at the edge
      localparam int NB_N = (y > 0)          ? T - MESH_X : -1;
      localparam int NB_E = (x < MESH_X - 1) ? T + 1      : -1;
      localparam int NB_S = (y < MESH_Y - 1) ? T + MESH_X : -1;
      localparam int NB_W = (x > 0)          ? T - 1      : -1;
      localparam int NB [4] = '{NB_N, NB_E, NB_S, NB_W};

      for (genvar p = 0; p < 4; p++) begin : g_p
        localparam int OPP = (p + 2) % 4;
        if (NB[p] >= 0) begin : g_link
          assign mi_valid[T][p] = mo_valid[NB[p]][OPP];
          assign mi[T][p]       = mo[NB[p]][OPP];
          assign mo_ready[T][p] = mi_ready[NB[p]][OPP];
        end else begin : g_edge
          assign mi_valid[T][p] = 1'b0;
          assign mi[T][p]       = '0;
          assign mo_ready[T][p] = 1'b1;
          // routing only targets tiles inside the mesh, so edge ports stay idle
          a_no_escape: assert property (@(posedge clk) disable iff (!rst_n) !mo_valid[T][p]);
        end
      end

      dnateq_tile #(.MY_X(x), .MY_Y(y)) u_tile (
        .clk, .rst_n, .dram_clk, .dram_rst_n,
        .cmd_valid(cmd_valid[T]), .cmd_ready(cmd_ready[T]), .cmd(cmd[T]), .mc_busy(mc_busy[T]),
        .cfg_we(cfg_we[T]), .cfg_addr(cfg_addr[T]), .cfg_data(cfg_data[T]),
        .pe_start(pe_start[T]), .pe_busy(pe_busy[T]), .pe_done(pe_done[T]), .pe_pg(pe_pg[T]),
        .mesh_in_valid(mi_valid[T]), .mesh_in_ready(mi_ready[T]), .mesh_in(mi[T]),
        .mesh_out_valid(mo_valid[T]), .mesh_out_ready(mo_ready[T]), .mesh_out(mo[T]),
        .vault_req(vault_req[T]), .vault_we(vault_we[T]), .vault_addr(vault_addr[T]),
        .vault_wdata(vault_wdata[T]), .vault_gnt(vault_gnt[T]),
        .vault_rvalid(vault_rvalid[T]), .vault_rdata(vault_rdata[T]));
    end
  end

endmodule
