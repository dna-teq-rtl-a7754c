// counter_set: one Counter Set (CS), accumulating one output neuron in the
// exponential domain.
//
// With A = S_A(alpha_A b^intA + beta_A) and W = S_W(alpha_W b^intW + beta_W) a
// dot product sum(A_i W_i) splits into four terms:
//   T1 = aA aW sum(S b^(intA+intW))   T2 = aW bA sum(S b^intW)
//   T3 = aA bW sum(S b^intA)          T4 = bA bW sum(S),   S = S_A xor S_W.
// Each step the CS adds the two exponents and, depending on the sign product,
// counts up or down in AC1 (entry intA+intW), AC2 (entry intW), AC3 (entry
// intA) and the accumulator Acc (term 4). The dequantizer later multiplies every
// count with its power of b.
//
// Index maps (this design's choice; only the table sizes 2^(n+1) and 2^n are
// given): AC1 entry = intA + intW + 2^n, AC2 entry = intW + 2^(n-1),
// AC3 entry = intA + 2^(n-1). A step where either operand carries the zero code
// changes nothing, since its sign is 0. term_en[k-1] enables term k, so terms
// computed offline (T2 and T4 depend only on weights when activations are
// non-negative) leave their tables untouched.
//
// Interface: step with a, w (qval_t) is one counting step, applied in the same
// cycle. Read-out: rd_en, rd_sel (cs_sel_e) and rd_idx; rd_data follows one cycle
// later, sign-extended to 16 bits; the read entry (or Acc) is cleared.
module counter_set
  import dnateq_pkg::*;
#(
  parameter int CNT_W = dnateq_pkg::CNT_W,
  parameter int ACC_W = dnateq_pkg::ACC_W
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  nbits,
  input  logic [3:0]  term_en,
  input  logic        step,
  input  qval_t       a,
  input  qval_t       w,
  input  logic        rd_en,
  input  cs_sel_e     rd_sel,
  input  logic [7:0]  rd_idx,
  output logic [15:0] rd_data,
  output logic        busy
);
  logic             za, zw, live, dn;
  logic [EXP_W:0]   sum;          // intA + intW, 8-bit signed
  logic [7:0]       i1;
  logic [6:0]       i2, i3;
  logic [7:0]       half, full;

  assign za   = (a.e == zero_code(nbits));
  assign zw   = (w.e == zero_code(nbits));
  assign live = step && !za && !zw;
  assign dn   = a.s ^ w.s;

  assign full = 8'd1 << nbits;          // 2^n
  assign half = 8'd1 << (nbits - 3'd1); // 2^(n-1)
  assign sum  = {a.e[EXP_W-1], a.e} + {w.e[EXP_W-1], w.e};
  assign i1   = sum + full;
  assign i2   = 7'(w.e + half[6:0]);
  assign i3   = 7'(a.e + half[6:0]);

  logic [CNT_W-1:0] d1, d2, d3;
  logic [2:0]       bsy;
  logic [15:0]      pg1, pg2, pg3;

  array_counter #(.DEPTH(AC1_DEPTH), .BANKS(16), .CNT_W(CNT_W)) u_ac1 (
    .clk, .rst_n, .nbits, .inc_en(live && term_en[0]), .inc_idx(i1), .down(dn),
    .rd_en(rd_en && rd_sel == SEL_AC1), .rd_idx(rd_idx), .rd_data(d1), .bank_pg(pg1), .busy(bsy[0]));
  array_counter #(.DEPTH(AC23_DEPTH), .BANKS(16), .CNT_W(CNT_W)) u_ac2 (
    .clk, .rst_n, .nbits, .inc_en(live && term_en[1]), .inc_idx(i2), .down(dn),
    .rd_en(rd_en && rd_sel == SEL_AC2), .rd_idx(rd_idx[6:0]), .rd_data(d2), .bank_pg(pg2), .busy(bsy[1]));
  array_counter #(.DEPTH(AC23_DEPTH), .BANKS(16), .CNT_W(CNT_W)) u_ac3 (
    .clk, .rst_n, .nbits, .inc_en(live && term_en[2]), .inc_idx(i3), .down(dn),
    .rd_en(rd_en && rd_sel == SEL_AC3), .rd_idx(rd_idx[6:0]), .rd_data(d3), .bank_pg(pg3), .busy(bsy[2]));

  // Term-4 accumulator of sign products
  logic signed [ACC_W-1:0] acc, acc_q;
  cs_sel_e                 sel_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc   <= '0;
      acc_q <= '0;
      sel_q <= SEL_ACC;
    end else begin
      if (live && term_en[3]) acc <= acc + (dn ? -ACC_W'(1) : ACC_W'(1));
      if (rd_en) sel_q <= rd_sel;
      if (rd_en && rd_sel == SEL_ACC) begin
        acc_q <= acc;
        acc   <= '0;
      end
    end
  end

  // Output mux of the CS
  always_comb begin
    unique case (sel_q)
      SEL_AC1: rd_data = 16'(signed'(d1));
      SEL_AC2: rd_data = 16'(signed'(d2));
      SEL_AC3: rd_data = 16'(signed'(d3));
      default: rd_data = 16'(acc_q);
    endcase
  end

  assign busy = |bsy;

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(step && rd_en));

endmodule
