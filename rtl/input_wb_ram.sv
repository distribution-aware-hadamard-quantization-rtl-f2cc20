// input_wb_ram: the input layer's Weight & Bias RAM. One word per hidden
// neuron j holds {wx_j, wy_j, bias_j}: the two signed WBITS-bit weights that
// multiply the x and y coordinates and the signed BBITS-bit bias in
// accumulator scale. Synchronous single-port-write, single-port-read memory:
// rdata is valid the cycle after re. The word layout and the host write port
// are this design's choices; the paper names the RAM and its role.
module input_wb_ram #(
  parameter int unsigned N_HID = 256,
  parameter int unsigned WBITS = 8,
  parameter int unsigned BBITS = 32,
  localparam int unsigned AW = $clog2(N_HID),
  localparam int unsigned DW = 2 * WBITS + BBITS
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [N_HID];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
