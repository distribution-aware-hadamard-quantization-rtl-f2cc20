// dhq_pkg: types and constants shared by the DHQ implicit-neural-representation
// accelerator. The network is a SIREN MLP with five layers: an input layer
// (2 coordinates -> N_HID neurons), N_MID hidden linear layers (N_HID -> N_HID)
// and a linear output layer (N_HID -> OUT_CH) without sine. Weights and
// activations are 8-bit signed integers (W8A8); accumulators and biases are
// 32-bit. The widths follow the paper's W8A8 configuration; the accumulator,
// bias, phase and sine widths are this design's own choices.
package dhq_pkg;

  localparam int unsigned ACC_W    = 32;  // accumulator / bias width
  localparam int unsigned MUL_W    = 16;  // per-layer scale multiplier width
  localparam int unsigned SHIFT_W  = 6;   // per-layer scale shift width
  localparam int unsigned LAYER_W  = 3;   // bits to number a layer 0..4

  // Per-layer runtime configuration, written by the host before a job.
  //   ph_mul/ph_shift : pre-activation -> sine phase (1024 steps per period),
  //                     phase = (z * ph_mul) >>> ph_shift; folds in SIREN's omega.
  //   q_mul/q_shift   : quantizer scale, q = sat(round(x * q_mul / 2^q_shift)).
  //   had_en          : apply the Hadamard transform to this layer's output
  //                     vector before quantizing it (hidden layers only).
  typedef struct packed {
    logic [MUL_W-1:0]   ph_mul;
    logic [SHIFT_W-1:0] ph_shift;
    logic [MUL_W-1:0]   q_mul;
    logic [SHIFT_W-1:0] q_shift;
    logic               had_en;
  } layer_cfg_t;

  // Sideband that travels with a dot product through the MAC array and the
  // adder tree: which layer and which output neuron it belongs to.
  typedef struct packed {
    logic [LAYER_W-1:0] layer;
    logic [15:0]        idx;
    logic               last;   // last neuron of the layer
  } op_tag_t;

  localparam int unsigned TAG_W = $bits(op_tag_t);

  // Controller states.
  typedef enum logic [2:0] {
    S_IDLE,
    S_IN_ISSUE,   // input layer: one neuron per cycle
    S_LIN_ISSUE,  // hidden or output layer: one weight row per cycle
    S_WAIT_VEC,   // wait until the layer's vector is in Intermediate RAM
    S_WAIT_PIX,   // wait until the output layer is in Result RAM
    S_DONE
  } ctrl_state_t;

endpackage
