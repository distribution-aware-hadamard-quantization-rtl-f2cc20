// input_layer: datapath of the first SIREN layer (2 -> N_HID). For one
// hidden neuron per cycle it multiplies the x and y coordinate by the
// neuron's two weights in a two-lane MAC array and sums the products with the
// bias in a two-input adder tree, giving the neuron's pre-activation z.
// Input: `in_valid` with the coordinate pair and the neuron's Weight & Bias
// RAM word {wx, wy, bias}. Output: `out_valid`, z and the sideband tag,
// three cycles later (1 multiply + 1 tree level + 1 bias stage).
// One neuron per cycle is this design's choice; the paper calls the input
// layer's MAC array "reduced-scale" and prints two rows of MAC cells.
module input_layer #(
  parameter int unsigned WBITS = 8,
  parameter int unsigned ABITS = 8,
  parameter int unsigned BBITS = 32,
  parameter int unsigned TAG_W = 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic signed [ABITS-1:0]     coord_x,
  input  logic signed [ABITS-1:0]     coord_y,
  input  logic [2*WBITS+BBITS-1:0]    wb_word,
  input  logic [TAG_W-1:0]            tag_in,
  output logic                        out_valid,
  output logic signed [BBITS-1:0]     z,
  output logic [TAG_W-1:0]            tag_out
);
  localparam int unsigned PW = WBITS + ABITS;

  logic [2*WBITS-1:0] w_pair;
  logic [2*ABITS-1:0] a_pair;
  logic [BBITS-1:0]   bias;
  logic               p_valid;
  logic [2*PW-1:0]    prod;
  logic [BBITS+TAG_W-1:0] p_tag;

  // Word layout {wx, wy, bias}; lane 0 = x, lane 1 = y.
  assign bias   = wb_word[BBITS-1:0];
  assign w_pair = {wb_word[BBITS +: WBITS], wb_word[BBITS+WBITS +: WBITS]};
  assign a_pair = {coord_y, coord_x};

  mac_array #(.N(2), .WBITS(WBITS), .ABITS(ABITS), .TAG_W(BBITS + TAG_W)) u_mac (
    .clk, .rst_n, .in_valid,
    .w(w_pair), .a(a_pair), .tag_in({bias, tag_in}),
    .out_valid(p_valid), .prod, .tag_out(p_tag)
  );

  adder_tree #(.N(2), .IN_W(PW), .OUT_W(BBITS), .TAG_W(TAG_W)) u_tree (
    .clk, .rst_n, .in_valid(p_valid), .din(prod),
    .bias($signed(p_tag[BBITS+TAG_W-1 -: BBITS])), .tag_in(p_tag[TAG_W-1:0]),
    .out_valid, .sum(z), .tag_out
  );
endmodule
