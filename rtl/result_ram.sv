// result_ram: the Result RAM holding the reconstructed image. Each output
// value (one per pixel and channel, address pixel*OUT_CH + channel) is a
// signed ABITS-bit number written by the Sine-and-Quant block when the
// output layer finishes. A second, read-only port lets the host read the
// image back; rdata is valid one cycle after raddr. Address map and the host
// port are this design's choices; the paper names the RAM.
module result_ram #(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned ABITS = 8,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [ABITS-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [ABITS-1:0] rdata
);
  logic [ABITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
