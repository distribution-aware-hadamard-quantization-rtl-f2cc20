// adder_tree: pipelined binary reduction of N signed IN_W-bit inputs to one
// OUT_W-bit sum, followed by the bias addition. The tree is stored as a
// heap: nodes N..2N-1 are the inputs, internal node i registers the sum of
// nodes 2i and 2i+1, so every tree level is one pipeline stage and a new
// set of inputs can enter every cycle. A last stage adds the bias.
// Latency: log2(N) + 1 cycles from in_valid to out_valid. The valid bit, the
// bias and a sideband tag travel along in a shift register.
// N must be a power of two (2 for the input layer, 256 for the linear
// layer). One register per level is this design's choice.
module adder_tree #(
  parameter int unsigned N     = 256,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 32,
  parameter int unsigned TAG_W = 1,
  localparam int unsigned L = $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [N*IN_W-1:0]       din,
  input  logic signed [OUT_W-1:0] bias,
  input  logic [TAG_W-1:0]        tag_in,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] sum,
  output logic [TAG_W-1:0]        tag_out
);
  logic signed [OUT_W-1:0] node [1:2*N-1];
  logic                    v_sr    [L+1];
  logic [TAG_W-1:0]        tag_sr  [L+1];
  logic signed [OUT_W-1:0] bias_sr [L+1];

  always_comb begin
    for (int k = 0; k < int'(N); k++)
      node[N+k] = OUT_W'($signed(din[k*IN_W +: IN_W]));
  end

  always_ff @(posedge clk) begin
    for (int i = 1; i < int'(N); i++)
      node[i] <= node[2*i] + node[2*i+1];
  end

  // Side pipeline: stage 0 is the input, stage L lines up with node[1].
  always_comb begin
    v_sr[0]    = in_valid;
    tag_sr[0]  = tag_in;
    bias_sr[0] = bias;
  end

  always_ff @(posedge clk) begin
    for (int s = 1; s <= int'(L); s++) begin
      v_sr[s]    <= rst_n ? v_sr[s-1] : 1'b0;
      tag_sr[s]  <= tag_sr[s-1];
      bias_sr[s] <= bias_sr[s-1];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_sr[L];
    sum     <= node[1] + bias_sr[L];
    tag_out <= tag_sr[L];
  end
endmodule
