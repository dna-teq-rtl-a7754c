// output_buffer: the PE's Output Buffer.
//
// Takes the two FP16 results the dequantizers produce together (O_i from
// dequantizer 0, O_i+1 from dequantizer 1) and presents them as one 32-bit word
// to the memory controller, O_i in the low half. A small FIFO (DEPTH words)
// with valid/ready on both sides decouples post-processing from memory writes.
// The two 16-bit slots and the 32-bit port follow the source; the FIFO depth
// and handshake are this design's choices.
module output_buffer #(
  parameter int DEPTH = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [15:0] o_lo,
  input  logic [15:0] o_hi,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data
);
  localparam int AW = $clog2(DEPTH);
  logic [31:0] mem [DEPTH];
  logic [AW:0] wp, rp;

  assign in_ready  = (wp - rp) != (AW+1)'(DEPTH);
  assign out_valid = (wp != rp);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready) begin
        mem[wp[AW-1:0]] <= {o_hi, o_lo};
        wp <= wp + 1'b1;
      end
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end
endmodule
