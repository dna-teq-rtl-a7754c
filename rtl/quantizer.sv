// quantizer: run-time exponential quantization of activations (pre-processing).
//
// Maps 8 FP16 activations to {sign, exponent} bytes without computing a
// logarithm: each activation magnitude is compared with the sorted interval
// boundaries of the layer, and the interval number becomes the exponent.
//
// Operation. Four 32-bit words fill the Activation Buffer (A_2k in the low
// half of word k, A_2k+1 in the high half). Then the controller reads the
// boundary rows 0 .. 2^(n-3)-1, one per cycle; the same 128-bit row goes to all
// eight CMP modules. An activation whose first boundary above |A| lies in row r,
// slot p, falls into interval q = 8r + p (the row number is the 4-bit "bias"
// that extends the encoder's 3-bit position). If |A| is not below any boundary,
// q clips to 2^n - 1. The exponent is int = q - 2^(n-1), so q = 0 (below the
// first boundary) yields the zero code -(2^(n-1)); the host writes the first
// boundary so that only values that must become zero lie below it.
// A 3-bit layer needs one boundary row, a 7-bit layer sixteen.
//
// Timing: dout_valid rises 2^(n-3) + 2 clock edges after the edge that
// accepts the fourth word. The next
// four words can be accepted while dout waits; the next scan starts once dout
// has been taken. Handshakes are valid/ready. Boundaries are written through
// bnd_wr_*.
// The buffer organisation, comparators, encoder and bias follow the source;
// the row-scan schedule and the interval-to-exponent mapping are this design's.
module quantizer
  import dnateq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  nbits,
  // activation words (FP16 pairs)
  input  logic        din_valid,
  output logic        din_ready,
  input  logic [31:0] din,
  // boundary configuration
  input  logic        bnd_wr_en,
  input  logic [6:0]  bnd_wr_addr,
  input  logic [15:0] bnd_wr_data,
  // 8 quantized activations, byte k = {S_Ak, int_Ak}
  output logic        dout_valid,
  input  logic        dout_ready,
  output logic [63:0] dout,
  output logic [15:0] rows_pg
);
  typedef enum logic [1:0] {S_LOAD, S_SCAN} state_e;
  state_e state;

  logic [15:0]  abuf [N_ACT];
  logic [2:0]   wcnt;       // words loaded (0..4)
  logic [3:0]   rd_row;     // row being requested (Addr)
  logic [3:0]   bias;       // row whose data is on the buffer output
  logic         cmp_v;      // buffer output is valid this cycle
  logic         last_req;
  logic [127:0] row;
  logic [4:0]   nrows;
  logic [N_ACT-1:0] found;
  logic [6:0]   q [N_ACT];
  logic [7:0]   lt  [N_ACT];
  logic         hit [N_ACT];
  logic [2:0]   pos [N_ACT];

  assign nrows     = 5'd1 << (nbits - 3'd3);
  assign din_ready = (wcnt != 3'd4);
  assign last_req  = (5'(rd_row) == nrows - 5'd1);

  boundary_buffer u_bnd (
    .clk, .nbits,
    .wr_en(bnd_wr_en), .wr_addr(bnd_wr_addr), .wr_data(bnd_wr_data),
    .rd_en(state == S_SCAN), .rd_row(rd_row), .rd_data(row), .rows_pg(rows_pg));

  for (genvar k = 0; k < N_ACT; k++) begin : g_cmp
    quant_cmp u_cmp (.mag(abuf[k][14:0]), .row(row), .lt(lt[k]), .hit(hit[k]), .pos(pos[k]));
  end

  logic [6:0] half, top;
  assign half = 7'd1 << (nbits - 3'd1);
  assign top  = 7'((8'd1 << nbits) - 8'd1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_LOAD;
      wcnt       <= '0;
      rd_row     <= '0;
      bias       <= '0;
      cmp_v      <= 1'b0;
      found      <= '0;
      dout_valid <= 1'b0;
      dout       <= '0;
      for (int k = 0; k < N_ACT; k++) begin
        abuf[k] <= '0;
        q[k]    <= '0;
      end
    end else begin
      if (dout_valid && dout_ready) dout_valid <= 1'b0;

      if (din_valid && din_ready) begin
        abuf[2*wcnt]   <= din[15:0];
        abuf[2*wcnt+1] <= din[31:16];
        wcnt           <= wcnt + 3'd1;
      end

      unique case (state)
        S_LOAD: begin
          if (wcnt == 3'd4 && (!dout_valid || dout_ready)) begin
            state  <= S_SCAN;
            rd_row <= '0;
            found  <= '0;
            cmp_v  <= 1'b0;
          end
        end
        S_SCAN: begin
          // Issue side: one row request per cycle, holding at the last row
          if (!last_req) rd_row <= rd_row + 4'd1;
          bias  <= rd_row;
          cmp_v <= 1'b1;
          // Compare side
          if (cmp_v) begin
            for (int k = 0; k < N_ACT; k++) begin
              if (!found[k] && hit[k]) begin
                found[k] <= 1'b1;
                q[k]     <= {bias, pos[k]};
              end
            end
            if (5'(bias) == nrows - 5'd1) begin
              // last row compared: encode and hand over
              for (int k = 0; k < N_ACT; k++) begin
                logic [6:0] qq;
                qq = found[k] ? q[k] : (hit[k] ? {bias, pos[k]} : top);
                dout[8*k +: 8] <= {abuf[k][15], 7'(qq - half)};
              end
              dout_valid <= 1'b1;
              wcnt       <= '0;
              state      <= S_LOAD;
              cmp_v      <= 1'b0;
            end
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // Activation words must not arrive into a buffer that is being scanned
  a_no_load_in_scan: assert property (@(posedge clk) disable iff (!rst_n)
                                       state == S_SCAN |-> !(din_valid && din_ready));

endmodule
