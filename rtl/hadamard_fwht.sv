// hadamard_fwht: fast Walsh-Hadamard transform of an N-element vector,
// vout = H_N * vin with the unnormalised Sylvester matrix
// H_1 = [1], H_2n = [[H_n, H_n], [H_n, -H_n]]. The 1/sqrt(N) normalisation
// is left to the quantizer's scale that follows.
// It works in place on one register vector, one butterfly stage per cycle:
// in stage s every pair (i, i + 2^s) with bit s of i clear becomes
// (a_i + a_j, a_i - a_j). `start` loads vin; log2(N) cycles later `done`
// pulses for one cycle and vout holds the result until the next start.
// Elements grow by one bit per stage: OUT_W = IN_W + log2(N).
// The transform follows the paper's recursive definition; its place between
// the sine and the quantizer and the sequential form are this design's.
module hadamard_fwht #(
  parameter int unsigned N    = 256,
  parameter int unsigned IN_W = 12,
  localparam int unsigned L     = $clog2(N),
  localparam int unsigned OUT_W = IN_W + L,
  localparam int unsigned SW    = (L > 1) ? $clog2(L) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N*IN_W-1:0]   vin,
  output logic                busy,
  output logic                done,
  output logic [N*OUT_W-1:0]  vout
);
  logic signed [OUT_W-1:0] v   [N];
  logic signed [OUT_W-1:0] nxt [N];
  logic [SW-1:0]           stage;

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      int j;
      j = i ^ (1 << stage);
      if (((i >> stage) & 1) == 0) nxt[i] = v[i] + v[j];
      else                         nxt[i] = v[j] - v[i];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; stage <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        stage <= '0;
      end else if (busy) begin
        stage <= stage + SW'(1);
        if (32'(stage) == L - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int i = 0; i < int'(N); i++) v[i] <= OUT_W'($signed(vin[i*IN_W +: IN_W]));
    end else if (busy) begin
      for (int i = 0; i < int'(N); i++) v[i] <= nxt[i];
    end
  end

  always_comb begin
    for (int i = 0; i < int'(N); i++) vout[i*OUT_W +: OUT_W] = v[i];
  end
endmodule
