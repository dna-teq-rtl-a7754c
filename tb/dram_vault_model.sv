// dram_vault_model: behavioural model of one DRAM vault for the testbenches.
//
// Not synthesizable logic of the design: it stands for the vault in the DRAM
// dies. A request (req, we, addr, wdata) is granted when no read is pending;
// writes complete at once, read data returns LAT cycles of dram_clk later with
// rvalid. Only the low AW address bits are decoded. The testbench preloads and
// inspects mem directly.
module dram_vault_model #(
  parameter int AW  = 12,
  parameter int LAT = 4
) (
  input  logic        dram_clk,
  input  logic        req,
  input  logic        we,
  input  logic [25:0] addr,
  input  logic [31:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [31:0] rdata
);
  logic [31:0] mem [1 << AW];
  int          wait_cnt = 0;
  logic        pending = 1'b0;
  int          n_writes = 0;

  logic refresh = 1'b0;
  assign gnt = !pending && !refresh;

  initial rvalid = 1'b0;
  initial rdata  = '0;

  always @(posedge dram_clk) begin
    rvalid <= 1'b0;
    refresh <= ($urandom_range(0, 7) == 0);
    if (req && gnt) begin
      if (we) begin
        mem[addr[AW-1:0]] <= wdata;
        n_writes <= n_writes + 1;
      end else begin
        pending  <= 1'b1;
        wait_cnt <= LAT;
        rdata    <= mem[addr[AW-1:0]];
      end
    end else if (pending) begin
      if (wait_cnt == 1) begin
        rvalid  <= 1'b1;
        pending <= 1'b0;
      end
      wait_cnt <= wait_cnt - 1;
    end
  end
endmodule
