// tb_dnateq_top: end-to-end test of the full 4 x 4 logic die at its default
// size, with a behavioural vault model on every tile.
//
// Two PE jobs run concurrently on different tiles with different layer
// settings (tile 0: n = 3, all four terms; tile 5: n = 6, terms 1 and 3 only):
// the job's input stream is preloaded into the tile's vault, the memory
// controller streams it to the PE and writes the 8 result words back to the
// vault, where they are compared with the reference model. At the same time
// two vault-to-vault transfers cross the mesh (tile 15 -> tile 0, tile 3 ->
// tile 12) and their data is checked at the destination. The test counts how
// often each mechanism occurred (zero operands skipped, negative sign
// products, clipped activations, exponent-width switch, disabled terms,
// remote writes, vault back-pressure) and fails any that never happened.
`timescale 1ns/1ps
module tb_dnateq_top;
  import dnateq_pkg::*;
  import tb_ref_pkg::*;

  localparam int NT = 16;

  logic clk = 0, dram_clk = 0, rst_n = 0, dram_rst_n = 0;
  always #5 clk = ~clk;
  always #3.5 dram_clk = ~dram_clk;

  logic              cmd_valid [NT];
  logic              cmd_ready [NT];
  mc_cmd_t           cmd       [NT];
  logic              mc_busy   [NT];
  logic              cfg_we    [NT];
  logic [9:0]        cfg_addr  [NT];
  logic [15:0]       cfg_data  [NT];
  logic              pe_start  [NT];
  logic              pe_busy   [NT];
  logic              pe_done   [NT];
  logic [15:0]       pe_pg     [NT];
  logic              vault_req [NT], vault_we [NT], vault_gnt [NT], vault_rvalid [NT];
  logic [ADDR_W-1:0] vault_addr [NT];
  logic [31:0]       vault_wdata [NT], vault_rdata [NT];

  int checks = 0, failures = 0;

  dnateq_top dut (.*);

  for (genvar t = 0; t < NT; t++) begin : g_v
    dram_vault_model #(.AW(12), .LAT(3 + t % 3)) u_v (
      .dram_clk, .req(vault_req[t]), .we(vault_we[t]), .addr(vault_addr[t]),
      .wdata(vault_wdata[t]), .gnt(vault_gnt[t]), .rvalid(vault_rvalid[t]), .rdata(vault_rdata[t]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- mechanism counters ----
  int n_stall = 0;
  always @(posedge dram_clk) for (int t = 0; t < NT; t++) if (vault_req[t] && !vault_gnt[t]) n_stall++;

  task automatic cfg(input int t, input logic [9:0] a, input logic [15:0] d);
    @(negedge clk);
    cfg_we[t] = 1; cfg_addr[t] = a; cfg_data[t] = d;
    @(negedge clk);
    cfg_we[t] = 0;
  endtask

  task automatic send_cmd(input int t, input mc_op_e op, input int addr, input int len,
                          input int dx, input int dy, input int daddr);
    @(negedge clk);
    while (!cmd_ready[t]) @(negedge clk);
    cmd_valid[t] = 1;
    cmd[t] = '{op: op, addr: ADDR_W'(addr), len: 16'(len), dst_x: COORD_W'(dx), dst_y: COORD_W'(dy),
               dst_addr: ADDR_W'(daddr)};
    @(negedge clk);
    cmd_valid[t] = 0;
  endtask

  task automatic load_job(input int t, input job_t j);
    for (int w = 0; w < j.nwords(); w++) begin
      case (t)
        0: g_v[0].u_v.mem[w] = j.word(w);
        5: g_v[5].u_v.mem[w] = j.word(w);
        default: ;
      endcase
    end
    for (int k = 0; k < 128; k++) cfg(t, 10'(k), j.bnd[k]);
    for (int k = 0; k < 256; k++) cfg(t, 10'(256 + k), j.blut[k]);
    for (int k = 0; k < 4; k++)   cfg(t, 10'(512 + k), j.scl[k]);
    cfg(t, 10'h300, 16'(j.n));
    cfg(t, 10'h301, 16'(j.nb));
    cfg(t, 10'h302, {12'h0, j.term_en});
  endtask

  task automatic run_job(input int t, input job_t j);
    @(negedge clk); pe_start[t] = 1;
    @(negedge clk); pe_start[t] = 0;
    send_cmd(t, MC_RD_PE, 0, j.nwords(), 0, 0, 0);
    send_cmd(t, MC_WR_PE, 'h800, 8, 0, 0, 0);
    @(negedge clk);
    while (pe_busy[t] || mc_busy[t]) @(negedge clk);
  endtask

  function automatic logic [31:0] vword(int t, int a);
    case (t)
      0:  return g_v[0].u_v.mem[a];
      5:  return g_v[5].u_v.mem[a];
      12: return g_v[12].u_v.mem[a];
      default: return '0;
    endcase
  endfunction

  initial begin
    job_t j0, j5;
    for (int t = 0; t < NT; t++) begin
      cmd_valid[t] = 0; cmd[t] = '0; cfg_we[t] = 0; cfg_addr[t] = 0; cfg_data[t] = 0; pe_start[t] = 0;
    end
    for (int a = 0; a < 4096; a++) begin
      g_v[15].u_v.mem[a] = 32'hf000_0000 + a;
      g_v[3].u_v.mem[a]  = 32'h3000_0000 + a;
    end
    repeat (5) @(negedge clk);
    rst_n = 1; dram_rst_n = 1;
    j0 = new(3, 3, 4'hf, 21);
    j5 = new(6, 2, 4'b0101, 22);
    load_job(0, j0);
    load_job(5, j5);
    repeat (300) @(negedge clk);   // counter clear sweep
    check(pe_pg[0] != pe_pg[5], "power-gate masks differ between 3-bit and 6-bit layers");
    fork
      run_job(0, j0);
      run_job(5, j5);
      send_cmd(15, MC_RD_NET, 'h100, 16, 0, 0, 'h900);
      send_cmd(3, MC_RD_NET, 'h200, 16, 0, 3, 'h900);
    join
    repeat (200) @(negedge clk);
    for (int k = 0; k < 8; k++) begin
      check(vword(0, 'h800 + k) == {j0.out[k + 8], j0.out[k]},
            $sformatf("tile 0 word %0d got %h exp %h", k, vword(0, 'h800 + k), {j0.out[k + 8], j0.out[k]}));
      check(vword(5, 'h800 + k) == {j5.out[k + 8], j5.out[k]},
            $sformatf("tile 5 word %0d got %h exp %h", k, vword(5, 'h800 + k), {j5.out[k + 8], j5.out[k]}));
    end
    for (int k = 0; k < 16; k++) begin
      check(vword(0, 'h900 + k) == 32'hf000_0100 + k, $sformatf("remote 15->0 word %0d got %h", k, vword(0, 'h900 + k)));
      check(vword(12, 'h900 + k) == 32'h3000_0200 + k, $sformatf("remote 3->12 word %0d got %h", k, vword(12, 'h900 + k)));
    end
    $display("mechanisms: zero-skip=%0d negative=%0d clip=%0d width-switch=%0d term-disable=%0d remote-writes=%0d vault-stall=%0d",
             j0.n_zero + j5.n_zero, j0.n_neg + j5.n_neg, j0.n_clip + j5.n_clip, (j0.n != j5.n),
             (j5.term_en != 4'hf), g_v[12].u_v.n_writes, n_stall);
    check(j0.n_zero + j5.n_zero > 0, "zero operands were skipped");
    check(j0.n_neg + j5.n_neg > 0, "negative sign products were counted");
    check(j0.n_clip + j5.n_clip > 0, "activations were clipped");
    check(j0.n != j5.n, "two exponent widths were used");
    check(j5.term_en != 4'hf, "a layer ran with terms disabled");
    check(g_v[12].u_v.n_writes == 16, "remote writes crossed the mesh");
    check(n_stall > 0, "vault back-pressure occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
