// array_counter: one Array Counter (AC) of a counter set.
//
// A banked table of DEPTH signed CNT_W-bit occurrence counters. During the
// counting stage each inc_en pulse adds +1 or -1 (down = 1) to entry inc_idx:
// the entry is read, passed through the adder together with the +1/-1 chosen by
// the count-up/down mux, and written back in the same cycle. During
// post-processing rd_en reads entry rd_idx; the value appears on rd_data one
// cycle later and the entry is cleared, so the table is empty again for the next
// group of output neurons. After reset the table is swept to zero, one entry per
// cycle, while busy is high.
//
// The table is split into BANKS banks of DEPTH/BANKS entries (16 banks; 16
// entries for AC1, 8 for AC2/AC3, 8-bit entries). A layer with n-bit exponents
// only uses 2^(n-3) banks; bank_pg flags the others so they can be power-gated.
// The banking, entry width, +1/-1 adder and address mux follow the source
// architecture; the single-cycle read-modify-write, clear-on-read and the reset
// sweep are choices of this design.
module array_counter #(
  parameter int DEPTH = 256,
  parameter int BANKS = 16,
  parameter int CNT_W = 8,
  localparam int IW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [2:0]       nbits,
  input  logic             inc_en,
  input  logic [IW-1:0]    inc_idx,
  input  logic             down,
  input  logic             rd_en,
  input  logic [IW-1:0]    rd_idx,
  output logic [CNT_W-1:0] rd_data,
  output logic [BANKS-1:0] bank_pg,
  output logic             busy
);
  localparam int PER_BANK = DEPTH / BANKS;
  localparam int BW = $clog2(BANKS);
  localparam int EW = $clog2(PER_BANK);

  logic [CNT_W-1:0] mem [BANKS][PER_BANK];
  logic [IW-1:0]    clr_idx;
  logic             clearing;

  logic [BW-1:0] wb, rb;
  logic [EW-1:0] we, re;
  logic [CNT_W-1:0] cur, nxt;

  assign wb = inc_idx[IW-1 -: BW];
  assign we = inc_idx[EW-1:0];
  assign rb = rd_idx[IW-1 -: BW];
  assign re = rd_idx[EW-1:0];

  // Adder fed by the count up/down mux
  assign cur = mem[wb][we];
  assign nxt = cur + (down ? {CNT_W{1'b1}} : CNT_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clr_idx  <= '0;
      clearing <= 1'b1;
      rd_data  <= '0;
    end else if (clearing) begin
      mem[clr_idx[IW-1 -: BW]][clr_idx[EW-1:0]] <= '0;
      clr_idx <= clr_idx + 1'b1;
      if (clr_idx == IW'(DEPTH - 1)) clearing <= 1'b0;
    end else begin
      if (inc_en) mem[wb][we] <= nxt;
      if (rd_en) begin
        rd_data      <= mem[rb][re];
        mem[rb][re]  <= '0;
      end
    end
  end

  assign busy = clearing;

  // Active banks: 2^(n-3) (1 bank for n = 3, 16 banks for n = 7)
  always_comb begin
    for (int b = 0; b < BANKS; b++) bank_pg[b] = (b >= (1 << (nbits - 3'd3)));
  end

  // Counting and read-out are separate stages of the PE
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(inc_en && rd_en));

endmodule
