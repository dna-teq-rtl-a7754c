// mem_ctrl: memory controller of one tile, serving one DRAM vault.
//
// Structure (after the source's Mem_Ctrl): a multiplexer merges requests from
// the tile's router (R) and its PE into FIFO Write; an FSM in the DRAM clock
// domain takes requests from FIFO Write and drives the vault's address and data
// lines; read data returns through FIFO Read to the logic clock domain, where a
// demultiplexer hands each word to the PE or to the router. The two FIFOs are
// the clock-domain crossing between logic die and DRAM dies. Data paths are
// 32 bits wide.
//
// This design's choices (the source gives the blocks only): the host issues
// commands on cmd_* (mc_cmd_t):
//   MC_RD_PE   read len words from addr and stream them to the PE,
//   MC_RD_NET  read len words from addr and send them as remote writes to
//              vault (dst_x, dst_y) at dst_addr,
//   MC_WR_PE   write the next len words of the PE's output stream to addr.
// Flits arriving from the router are remote writes and go straight into FIFO
// Write; they have priority over the PE side so the network always drains.
// The FSM handles one vault access at a time; a read waits for its data.
// FIFO Write entries: {write, addr, data, to_net, dst_x, dst_y, dst_addr}.
// FIFO Read entries: {to_net, dst_x, dst_y, dst_addr, data}.
// cmd_ready is high when no command is in progress; busy stays high until the
// last request of the command has entered FIFO Write.
module mem_ctrl
  import dnateq_pkg::*;
#(
  parameter int FIFO_DEPTH = 8
) (
  input  logic              clk,        // logic die
  input  logic              rst_n,
  input  logic              dram_clk,   // DRAM dies
  input  logic              dram_rst_n,
  // host commands
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  mc_cmd_t           cmd,
  output logic              busy,
  // PE side
  output logic              pe_in_valid,
  input  logic              pe_in_ready,
  output logic [31:0]       pe_in_data,
  input  logic              pe_out_valid,
  output logic              pe_out_ready,
  input  logic [31:0]       pe_out_data,
  // router local port
  input  logic              net_in_valid,
  output logic              net_in_ready,
  input  flit_t             net_in,
  output logic              net_out_valid,
  input  logic              net_out_ready,
  output flit_t             net_out,
  // vault
  output logic              vault_req,
  output logic              vault_we,
  output logic [ADDR_W-1:0] vault_addr,
  output logic [31:0]       vault_wdata,
  input  logic              vault_gnt,
  input  logic              vault_rvalid,
  input  logic [31:0]       vault_rdata
);
  typedef struct packed {
    logic                we;
    logic [ADDR_W-1:0]   addr;
    logic [31:0]         data;
    logic                to_net;
    logic [COORD_W-1:0]  dst_x;
    logic [COORD_W-1:0]  dst_y;
    logic [ADDR_W-1:0]   dst_addr;
  } wreq_t;

  typedef struct packed {
    logic                to_net;
    logic [COORD_W-1:0]  dst_x;
    logic [COORD_W-1:0]  dst_y;
    logic [ADDR_W-1:0]   dst_addr;
    logic [31:0]         data;
  } rresp_t;

  // ------------------------------------------------ logic domain: command --
  mc_cmd_t     cur;
  logic        active;
  logic [15:0] left;

  logic   fw_valid, fw_ready;
  wreq_t  fw_data;
  logic   pe_side_valid;
  wreq_t  pe_side;

  assign cmd_ready = !active;
  assign busy      = active;

  // PE-side request: a read of the current command, or a PE result word
  always_comb begin
    pe_side            = '0;
    pe_side.addr       = cur.addr;
    pe_side.to_net     = (cur.op == MC_RD_NET);
    pe_side.dst_x      = cur.dst_x;
    pe_side.dst_y      = cur.dst_y;
    pe_side.dst_addr   = cur.dst_addr;
    pe_side.we         = (cur.op == MC_WR_PE);
    pe_side.data       = pe_out_data;
    pe_side_valid      = active && ((cur.op == MC_WR_PE) ? pe_out_valid : 1'b1);
  end

  // Mux: router first, then the PE side
  always_comb begin
    if (net_in_valid) begin
      fw_valid       = 1'b1;
      fw_data        = '0;
      fw_data.we     = 1'b1;
      fw_data.addr   = net_in.addr;
      fw_data.data   = net_in.data;
    end else begin
      fw_valid = pe_side_valid;
      fw_data  = pe_side;
    end
  end
  assign net_in_ready = fw_ready;
  assign pe_out_ready = !net_in_valid && active && (cur.op == MC_WR_PE) && fw_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      left   <= '0;
      cur    <= '0;
    end else if (!active) begin
      if (cmd_valid && cmd.len != 16'd0) begin
        cur    <= cmd;
        left   <= cmd.len;
        active <= 1'b1;
      end
    end else if (!net_in_valid && pe_side_valid && fw_ready) begin
      cur.addr     <= cur.addr + 1'b1;
      cur.dst_addr <= cur.dst_addr + 1'b1;
      left         <= left - 16'd1;
      if (left == 16'd1) active <= 1'b0;
    end
  end

  // ------------------------------------------------------------- FIFOs ----
  logic   fwd_valid, fwd_ready;
  wreq_t  fwd;
  logic   frw_valid, frw_ready;
  rresp_t frw, frd;
  logic   frd_valid, frd_ready;

  async_fifo #(.WIDTH($bits(wreq_t)), .DEPTH(FIFO_DEPTH)) u_fifo_write (
    .wclk(clk), .wrst_n(rst_n), .wvalid(fw_valid), .wready(fw_ready), .wdata(fw_data),
    .rclk(dram_clk), .rrst_n(dram_rst_n), .rvalid(fwd_valid), .rready(fwd_ready), .rdata(fwd));

  async_fifo #(.WIDTH($bits(rresp_t)), .DEPTH(FIFO_DEPTH)) u_fifo_read (
    .wclk(dram_clk), .wrst_n(dram_rst_n), .wvalid(frw_valid), .wready(frw_ready), .wdata(frw),
    .rclk(clk), .rrst_n(rst_n), .rvalid(frd_valid), .rready(frd_ready), .rdata(frd));

  // ------------------------------------------------- DRAM domain: FSM ----
  typedef enum logic [1:0] {V_IDLE, V_WAIT, V_PUSH} vstate_e;
  vstate_e vstate;
  wreq_t   hold;

  assign vault_req   = (vstate == V_IDLE) && fwd_valid;
  assign vault_we    = fwd.we;
  assign vault_addr  = fwd.addr;
  assign vault_wdata = fwd.data;
  assign fwd_ready   = (vstate == V_IDLE) && vault_gnt;
  assign frw_valid   = (vstate == V_PUSH);

  always_ff @(posedge dram_clk) begin
    if (!dram_rst_n) begin
      vstate <= V_IDLE;
      hold   <= '0;
      frw    <= '0;
    end else begin
      unique case (vstate)
        V_IDLE: if (fwd_valid && vault_gnt && !fwd.we) begin
          hold   <= fwd;
          vstate <= V_WAIT;
        end
        V_WAIT: if (vault_rvalid) begin
          frw    <= '{to_net: hold.to_net, dst_x: hold.dst_x, dst_y: hold.dst_y,
                      dst_addr: hold.dst_addr, data: vault_rdata};
          vstate <= V_PUSH;
        end
        V_PUSH: if (frw_ready) vstate <= V_IDLE;
        default: vstate <= V_IDLE;
      endcase
    end
  end

  // --------------------------------------------- logic domain: DeMux ----
  assign pe_in_valid   = frd_valid && !frd.to_net;
  assign pe_in_data    = frd.data;
  assign net_out_valid = frd_valid && frd.to_net;
  assign net_out       = '{dst_x: frd.dst_x, dst_y: frd.dst_y, addr: frd.dst_addr, data: frd.data};
  assign frd_ready     = frd.to_net ? net_out_ready : pe_in_ready;

endmodule
