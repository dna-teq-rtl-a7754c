// async_fifo: dual-clock FIFO of the memory controller.
//
// Moves WIDTH-bit entries from the write clock domain to the read clock domain
// (logic die and DRAM dies run at different frequencies). Classic design:
// binary pointers with one extra wrap bit, converted to Gray code and passed
// through two-flop synchronisers into the other domain; full and empty are
// computed from the local pointer and the synchronised remote pointer, so both
// are conservative. The read data is combinational from the storage array at
// the read pointer (first-word fall-through). DEPTH must be a power of two.
// The source names the two FIFOs and their purpose; everything inside is this
// design's choice.
module async_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 8
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wvalid,
  output logic             wready,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             rvalid,
  input  logic             rready,
  output logic [WIDTH-1:0] rdata
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, rbin, wgray, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  assign wgray  = bin2gray(wbin);
  assign wready = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk) begin
    if (!wrst_n) begin
      wbin     <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wvalid && wready) begin
        mem[wbin[AW-1:0]] <= wdata;
        wbin <= wbin + 1'b1;
      end
    end
  end

  // read domain
  assign rgray  = bin2gray(rbin);
  assign rvalid = (rgray != wgray_r2);
  assign rdata  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk) begin
    if (!rrst_n) begin
      rbin     <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rvalid && rready) rbin <= rbin + 1'b1;
    end
  end
endmodule
