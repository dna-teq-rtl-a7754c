// tb_mem_ctrl: one memory controller with a vault model on a separate clock.
// Streams a range of the vault to the PE side (with PE back-pressure), writes
// PE words back to another range, accepts remote writes from the router side
// while doing so, and sends a range to the network as remote-write flits with
// incrementing destination addresses.
`timescale 1ns/1ps
module tb_mem_ctrl;
  import dnateq_pkg::*;
  localparam int WATCHDOG = 50000;
  `include "tb_check.svh"
  logic dram_clk = 0;
  always #3.5 dram_clk = ~dram_clk;
  logic rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  mc_cmd_t cmd;
  logic pe_in_valid, pe_in_ready = 0, pe_out_valid = 0, pe_out_ready;
  logic [31:0] pe_in_data, pe_out_data = 0;
  logic net_in_valid = 0, net_in_ready, net_out_valid, net_out_ready = 0;
  flit_t net_in, net_out;
  logic vault_req, vault_we, vault_gnt, vault_rvalid;
  logic [ADDR_W-1:0] vault_addr;
  logic [31:0] vault_wdata, vault_rdata;

  mem_ctrl dut (.clk, .rst_n, .dram_clk, .dram_rst_n(rst_n), .*);
  dram_vault_model #(.AW(12), .LAT(3)) u_v (.dram_clk, .req(vault_req), .we(vault_we), .addr(vault_addr),
    .wdata(vault_wdata), .gnt(vault_gnt), .rvalid(vault_rvalid), .rdata(vault_rdata));

  task automatic send(input mc_op_e op, input int addr, input int len, input int daddr);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: op, addr: ADDR_W'(addr), len: 16'(len), dst_x: 2'd2, dst_y: 2'd1, dst_addr: ADDR_W'(daddr)};
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    int got, sent, rem;
    cmd = '0; net_in = '0;
    for (int a = 0; a < 4096; a++) u_v.mem[a] = 32'hA000_0000 + a;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // 1. read 40 words to the PE side
    send(MC_RD_PE, 'h40, 40, 0);
    got = 0;
    while (got < 40) begin
      @(negedge clk);
      pe_in_ready = ($urandom_range(0, 2) != 0);
      #1 if (pe_in_valid && pe_in_ready) begin
        check(pe_in_data == 32'hA000_0040 + got, $sformatf("PE read word %0d = %h", got, pe_in_data));
        got++;
      end
    end
    @(negedge clk); pe_in_ready = 0;
    // 2. write 20 PE words to 0x300 while 10 remote writes arrive for 0x500
    fork
      send(MC_WR_PE, 'h300, 20, 0);
      begin
        sent = 0;
        while (sent < 20) begin
          @(negedge clk);
          pe_out_valid = 1; pe_out_data = 32'hB000_0000 + sent;
          #1 if (pe_out_ready) sent++;
        end
        @(negedge clk); pe_out_valid = 0;
      end
      begin
        rem = 0;
        while (rem < 10) begin
          @(negedge clk);
          net_in_valid = 1;
          net_in = '{dst_x: 2'd0, dst_y: 2'd0, addr: ADDR_W'('h500 + rem), data: 32'hC000_0000 + rem};
          #1 if (net_in_ready) rem++;
        end
        @(negedge clk); net_in_valid = 0;
      end
    join
    repeat (40) @(negedge clk);
    for (int k = 0; k < 20; k++) check(u_v.mem['h300 + k] == 32'hB000_0000 + k, $sformatf("PE write %0d", k));
    for (int k = 0; k < 10; k++) check(u_v.mem['h500 + k] == 32'hC000_0000 + k, $sformatf("remote write %0d", k));
    // 3. read 12 words to the network
    send(MC_RD_NET, 'h80, 12, 'h700);
    got = 0;
    while (got < 12) begin
      @(negedge clk);
      net_out_ready = ($urandom_range(0, 1) == 1);
      #1 if (net_out_valid && net_out_ready) begin
        check(net_out.data == 32'hA000_0080 + got && net_out.addr == ADDR_W'('h700 + got) &&
              net_out.dst_x == 2'd2 && net_out.dst_y == 2'd1, $sformatf("flit %0d", got));
        got++;
      end
    end
    @(negedge clk); net_out_ready = 0;
    repeat (5) @(negedge clk);
    check(!busy && !pe_in_valid && !net_out_valid, "idle at the end");
    finish();
  end
endmodule
