// intermediate_ram: the Intermediate RAM between layers. It holds two words
// (banks), each a whole activation vector of N_HID signed ABITS-bit values.
// A layer reads its input vector from one bank while the Sine-and-Quant
// block writes the layer's output vector into the other (ping-pong), so a
// layer's results never overwrite its own inputs. Synchronous read, one cycle
// latency. The ping-pong organisation is this design's choice.
module intermediate_ram #(
  parameter int unsigned N_HID = 256,
  parameter int unsigned ABITS = 8
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic                   wbank,
  input  logic [N_HID*ABITS-1:0] wdata,
  input  logic                   re,
  input  logic                   rbank,
  output logic [N_HID*ABITS-1:0] rdata
);
  logic [N_HID*ABITS-1:0] mem [2];

  always_ff @(posedge clk) begin
    if (we) mem[wbank] <= wdata;
    if (re) rdata <= mem[rbank];
  end
endmodule
