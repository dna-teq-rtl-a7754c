// dnateq_tile: one tile of the logic die: a processing element (PE), the
// memory controller (MC) of the vault above it and a mesh router (R).
//
// The PE reads its input stream from the MC and writes its results back
// through the MC; the MC's network side is the router's local port, so a vault
// can send words to any other vault (remote writes). The four mesh ports of the
// router are brought out for the neighbouring tiles (0 N, 1 E, 2 S, 3 W).
// Tile composition follows the source; port grouping is this design's.
module dnateq_tile
  import dnateq_pkg::*;
#(
  parameter int MY_X = 0,
  parameter int MY_Y = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              dram_clk,
  input  logic              dram_rst_n,
  // host
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  mc_cmd_t           cmd,
  output logic              mc_busy,
  input  logic              cfg_we,
  input  logic [9:0]        cfg_addr,
  input  logic [15:0]       cfg_data,
  input  logic              pe_start,
  output logic              pe_busy,
  output logic              pe_done,
  output logic [15:0]       pe_pg,
  // mesh ports 0..3
  input  logic              mesh_in_valid  [4],
  output logic              mesh_in_ready  [4],
  input  flit_t             mesh_in        [4],
  output logic              mesh_out_valid [4],
  input  logic              mesh_out_ready [4],
  output flit_t             mesh_out       [4],
  // vault
  output logic              vault_req,
  output logic              vault_we,
  output logic [ADDR_W-1:0] vault_addr,
  output logic [31:0]       vault_wdata,
  input  logic              vault_gnt,
  input  logic              vault_rvalid,
  input  logic [31:0]       vault_rdata
);
  logic        pi_valid, pi_ready, po_valid, po_ready;
  logic [31:0] pi_data, po_data;
  logic        r_in_valid [5], r_in_ready [5], r_out_valid [5], r_out_ready [5];
  flit_t       r_in [5], r_out [5];

  pe u_pe (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .start(pe_start), .busy(pe_busy), .done(pe_done),
    .in_valid(pi_valid), .in_ready(pi_ready), .in_data(pi_data),
    .out_valid(po_valid), .out_ready(po_ready), .out_data(po_data), .pg_banks(pe_pg));

  mem_ctrl u_mc (
    .clk, .rst_n, .dram_clk, .dram_rst_n,
    .cmd_valid, .cmd_ready, .cmd, .busy(mc_busy),
    .pe_in_valid(pi_valid), .pe_in_ready(pi_ready), .pe_in_data(pi_data),
    .pe_out_valid(po_valid), .pe_out_ready(po_ready), .pe_out_data(po_data),
    .net_in_valid(r_out_valid[4]), .net_in_ready(r_out_ready[4]), .net_in(r_out[4]),
    .net_out_valid(r_in_valid[4]), .net_out_ready(r_in_ready[4]), .net_out(r_in[4]),
    .vault_req, .vault_we, .vault_addr, .vault_wdata, .vault_gnt, .vault_rvalid, .vault_rdata);

  for (genvar p = 0; p < 4; p++) begin : g_mesh
    assign r_in_valid[p]     = mesh_in_valid[p];
    assign r_in[p]           = mesh_in[p];
    assign mesh_in_ready[p]  = r_in_ready[p];
    assign mesh_out_valid[p] = r_out_valid[p];
    assign mesh_out[p]       = r_out[p];
    assign r_out_ready[p]    = mesh_out_ready[p];
  end

  router #(.MY_X(MY_X), .MY_Y(MY_Y)) u_r (
    .clk, .rst_n, .in_valid(r_in_valid), .in_ready(r_in_ready), .in_flit(r_in),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_flit(r_out));

endmodule
