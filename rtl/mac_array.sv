// mac_array: an array of N parallel signed multipliers, the MAC array of
// the accelerator. Lane k multiplies weight w[k] by activation a[k]; the N
// products leave together one cycle later, registered, with the valid bit and
// an opaque sideband tag (layer, neuron, bias) delayed to match. The
// products are summed by the adder tree that follows, so one array plus one
// tree computes one complete dot product per cycle.
// The linear layer uses N = 256 lanes (the paper's "256 parallel MAC"
// figure); the input layer uses the same module with N = 2, one lane per
// coordinate. Lane packing: element k at bits [k*W +: W].
module mac_array #(
  parameter int unsigned N     = 256,
  parameter int unsigned WBITS = 8,
  parameter int unsigned ABITS = 8,
  parameter int unsigned TAG_W = 1,
  localparam int unsigned PW = WBITS + ABITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [N*WBITS-1:0] w,
  input  logic [N*ABITS-1:0] a,
  input  logic [TAG_W-1:0]   tag_in,
  output logic               out_valid,
  output logic [N*PW-1:0]    prod,
  output logic [TAG_W-1:0]   tag_out
);
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) begin
      tag_out <= tag_in;
      for (int k = 0; k < int'(N); k++)
        prod[k*PW +: PW] <= PW'($signed(w[k*WBITS +: WBITS]) * $signed(a[k*ABITS +: ABITS]));
    end
  end
endmodule
