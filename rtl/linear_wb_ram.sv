// linear_wb_ram: the linear layer's Weight & Bias RAM, shared by the hidden
// layers 2..4 and the output layer 5. One row per output neuron holds the
// N_HID signed WBITS-bit weights of that neuron (packed, element k at bits
// [k*WBITS +: WBITS]) and its BBITS-bit bias, so the 256 MACs get a full
// row per cycle. Row map: (l-2)*N_HID + j for hidden layer l, N_MID*N_HID + c
// for output channel c. Weights are stored as prepared offline, already
// multiplied by the normalised Hadamard matrix and quantized.
// Synchronous read, one cycle latency. Row map and port widths are this
// design's choices; the paper names the RAM and the wide MAC feed.
module linear_wb_ram #(
  parameter int unsigned N_HID  = 256,
  parameter int unsigned N_MID  = 3,
  parameter int unsigned OUT_CH = 1,
  parameter int unsigned WBITS  = 8,
  parameter int unsigned BBITS  = 32,
  localparam int unsigned DEPTH = N_MID * N_HID + OUT_CH,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [AW-1:0]          waddr,
  input  logic [N_HID*WBITS-1:0] wdata_w,
  input  logic [BBITS-1:0]       wdata_b,
  input  logic                   re,
  input  logic [AW-1:0]          raddr,
  output logic [N_HID*WBITS-1:0] rdata_w,
  output logic [BBITS-1:0]       rdata_b
);
  logic [N_HID*WBITS-1:0] wmem [DEPTH];
  logic [BBITS-1:0]       bmem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      wmem[waddr] <= wdata_w;
      bmem[waddr] <= wdata_b;
    end
    if (re) begin
      rdata_w <= wmem[raddr];
      rdata_b <= bmem[raddr];
    end
  end
endmodule
