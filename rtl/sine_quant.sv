// sine_quant: the "Sine and Quant" stage between layers, fed by the adder
// trees of both the input layer and the linear layer.
//
// Hidden layers (tag.layer < OUT_LAYER): each pre-activation z goes through
// the sine unit and is stored at its neuron index in a collection register.
// When the layer's last neuron arrives the vector is, if the layer's had_en
// bit is set, passed through the Hadamard transform (H_N, log2 N cycles);
// then all N values are quantized in parallel with the layer's scale and
// written as one word into the Intermediate RAM bank tag.layer[0]
// (act_we, one cycle; vec_done marks the same cycle).
//
// Output layer (tag.layer == OUT_LAYER): no sine and no transform; each value
// is quantized with the output layer's scale and written to the Result RAM
// at res_base + neuron (res_we one cycle after the input); pix_done marks
// the write of the last channel.
//
// q_sat pulses when any value of a write was clipped. At most one of the two
// inputs may be valid in a cycle (checked by an assertion). The split into
// sine, optional Hadamard and uniform quantizer follows the paper's method;
// the collection register, scale format and bypass bit are this design's.
module sine_quant
  import dhq_pkg::*;
#(
  parameter int unsigned N_HID  = 256,
  parameter int unsigned N_MID  = 3,
  parameter int unsigned ABITS  = 8,
  parameter int unsigned SIN_W  = 12,
  parameter int unsigned RES_AW = 16,
  localparam int unsigned NL        = N_MID + 2,
  localparam int unsigned OUT_LAYER = N_MID + 1,
  localparam int unsigned HW        = SIN_W + $clog2(N_HID)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  layer_cfg_t               cfg [NL],
  // from the input layer's adder tree
  input  logic                     in0_valid,
  input  logic signed [ACC_W-1:0]  in0_z,
  input  op_tag_t                  in0_tag,
  // from the linear layer's adder tree
  input  logic                     in1_valid,
  input  logic signed [ACC_W-1:0]  in1_z,
  input  op_tag_t                  in1_tag,
  input  logic [RES_AW-1:0]        res_base,
  // to the Intermediate RAM
  output logic                     act_we,
  output logic                     act_wbank,
  output logic [N_HID*ABITS-1:0]   act_wdata,
  output logic                     vec_done,
  // to the Result RAM
  output logic                     res_we,
  output logic [RES_AW-1:0]        res_waddr,
  output logic [ABITS-1:0]         res_wdata,
  output logic                     pix_done,
  output logic                     q_sat
);
  // ---- input select -------------------------------------------------------
  logic                    v;
  logic signed [ACC_W-1:0] z;
  op_tag_t                 tag;
  logic                    is_out;

  always_comb begin
    v      = in0_valid | in1_valid;
    z      = in0_valid ? in0_z : in1_z;
    tag    = in0_valid ? in0_tag : in1_tag;
    is_out = (32'(tag.layer) == OUT_LAYER);
  end

  // ---- hidden path: sine and collection ------------------------------------
  logic                    s_valid;
  logic signed [SIN_W-1:0] s_val;
  op_tag_t                 s_tag;
  logic [SIN_W-1:0]        coll [N_HID];

  sine_unit #(.Z_W(ACC_W), .MUL_W(MUL_W), .SHIFT_W(SHIFT_W), .SIN_W(SIN_W)) u_sine (
    .clk, .rst_n, .in_valid(v && !is_out), .z,
    .ph_mul(cfg[tag.layer].ph_mul), .ph_shift(cfg[tag.layer].ph_shift),
    .out_valid(s_valid), .s(s_val)
  );

  always_ff @(posedge clk) begin
    if (v && !is_out) s_tag <= tag;
    if (s_valid) coll[s_tag.idx[$clog2(N_HID)-1:0]] <= s_val;
  end

  // ---- vector stage: optional Hadamard, then quantize ----------------------
  typedef enum logic [1:0] {V_IDLE, V_HAD, V_QUANT} vstate_t;
  vstate_t              vst;
  logic [LAYER_W-1:0]   vlayer;
  logic                 had_start, had_done, had_busy, had_sel;
  logic [N_HID*SIN_W-1:0] coll_flat;
  logic [N_HID*HW-1:0]  had_out;

  always_comb begin
    for (int i = 0; i < int'(N_HID); i++) coll_flat[i*SIN_W +: SIN_W] = coll[i];
  end

  // The last sine value is written into `coll` at the edge that ends the
  // s_valid cycle, so the vector stage starts one cycle after it.
  logic last_seen;
  always_ff @(posedge clk) begin
    if (!rst_n) last_seen <= 1'b0;
    else        last_seen <= s_valid && s_tag.last;
  end

  assign had_start = last_seen && cfg[s_tag.layer].had_en && (vst == V_IDLE);

  hadamard_fwht #(.N(N_HID), .IN_W(SIN_W)) u_had (
    .clk, .rst_n, .start(had_start), .vin(coll_flat),
    .busy(had_busy), .done(had_done), .vout(had_out)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vst <= V_IDLE; vlayer <= '0; had_sel <= 1'b0;
    end else begin
      case (vst)
        V_IDLE:  if (last_seen) begin
                   vlayer  <= s_tag.layer;
                   had_sel <= cfg[s_tag.layer].had_en;
                   vst     <= cfg[s_tag.layer].had_en ? V_HAD : V_QUANT;
                 end
        V_HAD:   if (had_done) vst <= V_QUANT;
        V_QUANT: vst <= V_IDLE;
        default: vst <= V_IDLE;
      endcase
    end
  end

  logic [N_HID*ABITS-1:0] qvec;
  logic [N_HID-1:0]       qsat_v;

  for (genvar i = 0; i < int'(N_HID); i++) begin : g_q
    logic signed [HW-1:0] qin;
    assign qin = had_sel ? $signed(had_out[i*HW +: HW]) : HW'($signed(coll[i]));
    quantizer #(.IN_W(HW), .MUL_W(MUL_W), .SHIFT_W(SHIFT_W), .ABITS(ABITS)) u_q (
      .x(qin), .mul(cfg[vlayer].q_mul), .shift(cfg[vlayer].q_shift),
      .q(qvec[i*ABITS +: ABITS]), .sat(qsat_v[i])
    );
  end

  // ---- output path ---------------------------------------------------------
  logic signed [ABITS-1:0] oq;
  logic                    osat;

  quantizer #(.IN_W(ACC_W), .MUL_W(MUL_W), .SHIFT_W(SHIFT_W), .ABITS(ABITS)) u_oq (
    .x(z), .mul(cfg[OUT_LAYER].q_mul), .shift(cfg[OUT_LAYER].q_shift), .q(oq), .sat(osat)
  );

  // ---- registered outputs --------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act_we <= 1'b0; vec_done <= 1'b0; res_we <= 1'b0; pix_done <= 1'b0; q_sat <= 1'b0;
    end else begin
      act_we   <= (vst == V_QUANT);
      vec_done <= (vst == V_QUANT);
      res_we   <= v && is_out;
      pix_done <= v && is_out && tag.last;
      q_sat    <= ((vst == V_QUANT) && (|qsat_v)) || (v && is_out && osat);
    end
    if (vst == V_QUANT) begin
      act_wdata <= qvec;
      act_wbank <= vlayer[0];
    end
    if (v && is_out) begin
      res_waddr <= res_base + RES_AW'(tag.idx);
      res_wdata <= oq;
    end
  end

  // The two layers never deliver in the same cycle.
  a_one_source: assert property (@(posedge clk) disable iff (!rst_n) !(in0_valid && in1_valid));
  // A new layer cannot finish while the previous vector is still in flight.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) !(last_seen && vst != V_IDLE));
endmodule
