// dhq_inr_top: W8A8 SIREN inference accelerator with distribution-aware
// Hadamard quantization. Given a run of pixels, it evaluates for every pixel
// the five-layer MLP  (x, y) -> sin -> sin -> sin -> sin -> linear -> value
// and stores the OUT_CH quantized output values in the Result RAM.
//
// Structure (left to right as data flows):
//   coord_gen        pixel coordinates
//   input_wb_ram     + input_layer     (2 MAC lanes + 2-input adder tree)
//   sine_quant       sine, Hadamard transform (optional per layer), quantizer
//   intermediate_ram two-bank activation buffer
//   linear_wb_ram    + linear_layer    (N_HID MAC lanes + adder tree),
//                    reused for hidden layers 2..N_MID+1 and the output layer
//   result_ram       output image, host read port
//   mem_ctrl         sequencing of all of the above
//
// Host interface (plain ports): write ports of both Weight & Bias RAMs,
// per-layer configuration `cfg` (must be stable during a job), a job start
// with first pixel and pixel count, busy/done, q_sat (a value was clipped)
// and a read port of the Result RAM. Each layer costs its neuron count in
// cycles plus the pipeline fill; see the accompanying documentation for the
// cycle formula. Weights for layers that read a Hadamard-transformed vector
// must be prepared offline as W * H_N / sqrt(N_HID), quantized to int8.
module dhq_inr_top
  import dhq_pkg::*;
#(
  parameter int unsigned N_HID  = 256,
  parameter int unsigned N_MID  = 3,
  parameter int unsigned OUT_CH = 1,
  parameter int unsigned IMG_W  = 256,
  parameter int unsigned IMG_H  = 256,
  parameter int unsigned WBITS  = 8,
  parameter int unsigned ABITS  = 8,
  parameter int unsigned SIN_W  = 12,
  localparam int unsigned NL     = N_MID + 2,
  localparam int unsigned IN_AW  = $clog2(N_HID),
  localparam int unsigned LIN_D  = N_MID * N_HID + OUT_CH,
  localparam int unsigned LIN_AW = $clog2(LIN_D),
  localparam int unsigned RES_D  = IMG_W * IMG_H * OUT_CH,
  localparam int unsigned RES_AW = (RES_D > 1) ? $clog2(RES_D) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  layer_cfg_t                   cfg [NL],
  // input-layer Weight & Bias RAM load: {wx, wy, bias}
  input  logic                         in_we,
  input  logic [IN_AW-1:0]             in_waddr,
  input  logic [2*WBITS+ACC_W-1:0]     in_wdata,
  // linear-layer Weight & Bias RAM load
  input  logic                         lin_we,
  input  logic [LIN_AW-1:0]            lin_waddr,
  input  logic [N_HID*WBITS-1:0]       lin_wdata_w,
  input  logic [ACC_W-1:0]             lin_wdata_b,
  // job
  input  logic                         start,
  input  logic [31:0]                  first_pix,
  input  logic [31:0]                  num_pix,
  output logic                         busy,
  output logic                         done,
  output logic                         q_sat,
  // Result RAM read
  input  logic [RES_AW-1:0]            res_raddr,
  output logic [ABITS-1:0]             res_rdata
);
  // coordinate generator
  logic                    cg_step, cg_active, cg_last;
  logic signed [ABITS-1:0] cx, cy;
  logic [31:0]             pix_idx;

  // memory control
  logic              in_re, lin_re, act_re, act_rbank, rd0_valid, rd1_valid;
  logic [IN_AW-1:0]  in_raddr;
  logic [LIN_AW-1:0] lin_raddr;
  op_tag_t           rd_tag;
  logic              vec_done, pix_done;

  // datapath
  logic [2*WBITS+ACC_W-1:0] in_rdata;
  logic [N_HID*WBITS-1:0]   lin_rdata_w;
  logic [ACC_W-1:0]         lin_rdata_b;
  logic [N_HID*ABITS-1:0]   act_rdata, act_wdata;
  logic                     act_we, act_wbank;
  logic                     z0_valid, z1_valid;
  logic signed [ACC_W-1:0]  z0, z1;
  logic [TAG_W-1:0]         z0_tag, z1_tag;
  logic                     res_we;
  logic [RES_AW-1:0]        res_waddr;
  logic [ABITS-1:0]         res_wdata;

  coord_gen #(.IMG_W(IMG_W), .IMG_H(IMG_H), .ABITS(ABITS)) u_cg (
    .clk, .rst_n, .start(start && !busy), .first_pix, .num_pix, .step(cg_step),
    .active(cg_active), .coord_x(cx), .coord_y(cy), .pix_idx, .last(cg_last)
  );

  mem_ctrl #(.N_HID(N_HID), .N_MID(N_MID), .OUT_CH(OUT_CH)) u_ctrl (
    .clk, .rst_n, .start(start && !busy && num_pix != 0), .busy, .done,
    .cg_last, .cg_step,
    .in_re, .in_raddr, .lin_re, .lin_raddr, .act_re, .act_rbank,
    .rd0_valid, .rd1_valid, .rd_tag, .vec_done, .pix_done
  );

  input_wb_ram #(.N_HID(N_HID), .WBITS(WBITS), .BBITS(ACC_W)) u_in_ram (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .re(in_re), .raddr(in_raddr), .rdata(in_rdata)
  );

  input_layer #(.WBITS(WBITS), .ABITS(ABITS), .BBITS(ACC_W), .TAG_W(TAG_W)) u_in_layer (
    .clk, .rst_n, .in_valid(rd0_valid), .coord_x(cx), .coord_y(cy),
    .wb_word(in_rdata), .tag_in(rd_tag),
    .out_valid(z0_valid), .z(z0), .tag_out(z0_tag)
  );

  linear_wb_ram #(.N_HID(N_HID), .N_MID(N_MID), .OUT_CH(OUT_CH), .WBITS(WBITS), .BBITS(ACC_W)) u_lin_ram (
    .clk, .we(lin_we), .waddr(lin_waddr), .wdata_w(lin_wdata_w), .wdata_b(lin_wdata_b),
    .re(lin_re), .raddr(lin_raddr), .rdata_w(lin_rdata_w), .rdata_b(lin_rdata_b)
  );

  intermediate_ram #(.N_HID(N_HID), .ABITS(ABITS)) u_act_ram (
    .clk, .we(act_we), .wbank(act_wbank), .wdata(act_wdata),
    .re(act_re), .rbank(act_rbank), .rdata(act_rdata)
  );

  linear_layer #(.N_HID(N_HID), .WBITS(WBITS), .ABITS(ABITS), .BBITS(ACC_W), .TAG_W(TAG_W)) u_lin_layer (
    .clk, .rst_n, .in_valid(rd1_valid), .w_row(lin_rdata_w), .bias(lin_rdata_b),
    .act(act_rdata), .tag_in(rd_tag),
    .out_valid(z1_valid), .z(z1), .tag_out(z1_tag)
  );

  sine_quant #(.N_HID(N_HID), .N_MID(N_MID), .ABITS(ABITS), .SIN_W(SIN_W), .RES_AW(RES_AW)) u_sq (
    .clk, .rst_n, .cfg,
    .in0_valid(z0_valid), .in0_z(z0), .in0_tag(z0_tag),
    .in1_valid(z1_valid), .in1_z(z1), .in1_tag(z1_tag),
    .res_base(RES_AW'(pix_idx * OUT_CH)),
    .act_we, .act_wbank, .act_wdata, .vec_done,
    .res_we, .res_waddr, .res_wdata, .pix_done, .q_sat
  );

  result_ram #(.DEPTH(RES_D), .ABITS(ABITS)) u_res_ram (
    .clk, .we(res_we), .waddr(res_waddr), .wdata(res_wdata), .raddr(res_raddr), .rdata(res_rdata)
  );

  // cg_active is high throughout a job; mem_ctrl follows the same job.
  a_cg_follows: assert property (@(posedge clk) disable iff (!rst_n) (rd0_valid |-> cg_active));
endmodule
