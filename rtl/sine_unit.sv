// sine_unit: the sine activation of a hidden neuron. The signed 32-bit
// pre-activation z is scaled to a phase with the layer's multiplier and
// shift, phase = (z * ph_mul) >>> ph_shift, of which the low PH_BITS bits
// index one period (this folds SIREN's frequency factor and the fixed-point
// scale of z into two numbers per layer). The sine is read from a
// quarter-wave table of 2^(PH_BITS-2)+1 entries,
//   T[k] = round((2^(SIN_W-1)-1) * sin(2*pi*k / 2^PH_BITS)),
// stored in rtl/sine_quarter.hex for PH_BITS = 10, SIN_W = 12, and mirrored
// for the other three quadrants. Output s is registered: one cycle latency,
// one value per cycle. The paper gives only "a sine activation function";
// the table method and widths are this design's choices.
module sine_unit #(
  parameter int unsigned Z_W     = 32,
  parameter int unsigned MUL_W   = 16,
  parameter int unsigned SHIFT_W = 6,
  parameter int unsigned PH_BITS = 10,
  parameter int unsigned SIN_W   = 12,
  localparam int unsigned QN = 2 ** (PH_BITS - 2)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [Z_W-1:0]   z,
  input  logic [MUL_W-1:0]        ph_mul,
  input  logic [SHIFT_W-1:0]      ph_shift,
  output logic                    out_valid,
  output logic signed [SIN_W-1:0] s
);
  logic [SIN_W-1:0] rom [QN+1];
  initial $readmemh("rtl/sine_quarter.hex", rom);

  localparam int unsigned PRW = Z_W + MUL_W + 1;
  logic signed [PRW-1:0]     scaled;
  logic [PH_BITS-1:0]        phase;
  logic [1:0]                quad;
  logic [PH_BITS-3:0]        k;
  logic [PH_BITS-2:0]        kk;
  logic signed [SIN_W-1:0]   mag;

  always_comb begin
    scaled = (PRW'(z) * $signed({1'b0, ph_mul})) >>> ph_shift;
    phase  = scaled[PH_BITS-1:0];
    quad   = phase[PH_BITS-1 -: 2];
    k      = phase[PH_BITS-3:0];
    // Quadrants 1 and 3 run the table backwards: index QN - k.
    kk     = quad[0] ? ((PH_BITS-1)'(QN) - (PH_BITS-1)'(k)) : (PH_BITS-1)'(k);
    mag    = $signed(rom[kk]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    s <= quad[1] ? -mag : mag;
  end
endmodule
