// linear_layer: datapath of the hidden layers and the output layer
// (N_HID -> N_HID, N_HID -> OUT_CH), shared by all of them. Every cycle it
// takes one weight row and its bias from the linear Weight & Bias RAM and the
// layer's input vector from the Intermediate RAM, multiplies them lane by
// lane in an N_HID-wide MAC array and reduces the products with a pipelined
// adder tree plus bias: one output neuron's pre-activation per cycle.
// Latency: 1 (MAC) + log2(N_HID) + 1 (tree and bias) cycles.
// The 256 lanes follow the paper; one output neuron per cycle (one array,
// one tree) is this design's reading of the figure.
module linear_layer #(
  parameter int unsigned N_HID = 256,
  parameter int unsigned WBITS = 8,
  parameter int unsigned ABITS = 8,
  parameter int unsigned BBITS = 32,
  parameter int unsigned TAG_W = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [N_HID*WBITS-1:0]   w_row,
  input  logic [BBITS-1:0]         bias,
  input  logic [N_HID*ABITS-1:0]   act,
  input  logic [TAG_W-1:0]         tag_in,
  output logic                     out_valid,
  output logic signed [BBITS-1:0]  z,
  output logic [TAG_W-1:0]         tag_out
);
  localparam int unsigned PW = WBITS + ABITS;

  logic                    p_valid;
  logic [N_HID*PW-1:0]     prod;
  logic [BBITS+TAG_W-1:0]  p_tag;

  mac_array #(.N(N_HID), .WBITS(WBITS), .ABITS(ABITS), .TAG_W(BBITS + TAG_W)) u_mac (
    .clk, .rst_n, .in_valid, .w(w_row), .a(act), .tag_in({bias, tag_in}),
    .out_valid(p_valid), .prod, .tag_out(p_tag)
  );

  adder_tree #(.N(N_HID), .IN_W(PW), .OUT_W(BBITS), .TAG_W(TAG_W)) u_tree (
    .clk, .rst_n, .in_valid(p_valid), .din(prod),
    .bias($signed(p_tag[BBITS+TAG_W-1 -: BBITS])), .tag_in(p_tag[TAG_W-1:0]),
    .out_valid, .sum(z), .tag_out
  );
endmodule
