// quantizer: the uniform symmetric quantizer applied to every activation.
//   q = clamp(round_half_up(x * mul / 2^shift), -2^(ABITS-1), 2^(ABITS-1)-1)
// with an unsigned multiplier `mul` and a right shift `shift` that together
// set the quantization step of one layer (zero point 0). `sat` flags a value
// that was clipped. Purely combinational. The paper uses one common uniform
// quantizer for every layer, after the Hadamard transform has made the
// distributions bell-shaped; the scale format (multiplier and shift) and
// round-half-up are this design's choices.
module quantizer #(
  parameter int unsigned IN_W    = 20,
  parameter int unsigned MUL_W   = 16,
  parameter int unsigned SHIFT_W = 6,
  parameter int unsigned ABITS   = 8
) (
  input  logic signed [IN_W-1:0]  x,
  input  logic [MUL_W-1:0]        mul,
  input  logic [SHIFT_W-1:0]      shift,
  output logic signed [ABITS-1:0] q,
  output logic                    sat
);
  // PW leaves room for the rounding constant; shifts beyond PW-2 give the
  // same result as PW-2 (the scaled value rounds to 0), so they are clamped.
  localparam int unsigned PW   = IN_W + MUL_W + 3;
  localparam int unsigned SMAX = PW - 2;
  localparam logic signed [PW-1:0] QMAX = PW'(2 ** (ABITS - 1) - 1);
  localparam logic signed [PW-1:0] QMIN = -PW'(2 ** (ABITS - 1));

  logic signed [PW-1:0] prod, rnd, scaled;
  logic [SHIFT_W:0]     sh;

  always_comb begin
    prod   = PW'(x) * $signed({1'b0, mul});
    sh     = (32'(shift) > SMAX) ? (SHIFT_W+1)'(SMAX) : {1'b0, shift};
    rnd    = (sh == 0) ? '0 : (PW'(1) <<< (sh - 1));
    scaled = (prod + rnd) >>> sh;
    sat    = 1'b0;
    if (scaled > QMAX) begin
      q = ABITS'(QMAX); sat = 1'b1;
    end else if (scaled < QMIN) begin
      q = ABITS'(QMIN); sat = 1'b1;
    end else begin
      q = ABITS'(scaled);
    end
  end
endmodule
