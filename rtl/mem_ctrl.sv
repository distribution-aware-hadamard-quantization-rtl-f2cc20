// mem_ctrl: the memory control unit that sequences the whole network, one
// pixel at a time. For each pixel it
//   1. issues the N_HID input-layer reads (one neuron per cycle) from the
//      input Weight & Bias RAM, then waits for Sine-and-Quant to write the
//      vector to Intermediate RAM bank 0 (vec_done);
//   2. for each hidden layer l = 1..N_MID issues N_HID row reads from the
//      linear Weight & Bias RAM together with reads of Intermediate RAM bank
//      (l-1) mod 2, then waits for vec_done (the result goes to bank l mod 2);
//   3. for the output layer issues OUT_CH row reads and waits for pix_done;
//   4. steps the coordinate generator, or finishes after the last pixel.
// Layers are numbered 0 (input) .. N_MID+1 (output) in the tags.
// Read requests go out combinationally in the issuing cycle; rd0_valid /
// rd1_valid and rd_tag are the same requests delayed one cycle, lined up
// with the synchronous RAM outputs. `done` pulses once when the job ends.
// The paper names this unit and its control arrows; the state sequence is
// this design's. Layers do not overlap.
module mem_ctrl
  import dhq_pkg::*;
#(
  parameter int unsigned N_HID  = 256,
  parameter int unsigned N_MID  = 3,
  parameter int unsigned OUT_CH = 1,
  localparam int unsigned IN_AW  = $clog2(N_HID),
  localparam int unsigned LIN_D  = N_MID * N_HID + OUT_CH,
  localparam int unsigned LIN_AW = $clog2(LIN_D)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // coordinate generator
  input  logic              cg_last,
  output logic              cg_step,
  // input-layer Weight & Bias RAM
  output logic              in_re,
  output logic [IN_AW-1:0]  in_raddr,
  // linear-layer Weight & Bias RAM and Intermediate RAM
  output logic              lin_re,
  output logic [LIN_AW-1:0] lin_raddr,
  output logic              act_re,
  output logic              act_rbank,
  // requests lined up with the RAM data
  output logic              rd0_valid,
  output logic              rd1_valid,
  output op_tag_t           rd_tag,
  // completion from Sine-and-Quant
  input  logic              vec_done,
  input  logic              pix_done
);
  localparam int unsigned OUT_LAYER = N_MID + 1;

  ctrl_state_t        st;
  logic [LAYER_W-1:0] layer;
  logic [15:0]        cnt;
  logic [15:0]        cnt_max;   // neurons in the current layer minus one
  op_tag_t            tag_now;

  always_comb begin
    cnt_max = (32'(layer) == OUT_LAYER) ? 16'(OUT_CH - 1) : 16'(N_HID - 1);
    tag_now.layer = layer;
    tag_now.idx   = cnt;
    tag_now.last  = (cnt == cnt_max);

    in_re     = (st == S_IN_ISSUE);
    in_raddr  = IN_AW'(cnt);
    lin_re    = (st == S_LIN_ISSUE);
    act_re    = (st == S_LIN_ISSUE);
    act_rbank = ~layer[0];   // layer l reads bank (l-1) mod 2
    if (32'(layer) == OUT_LAYER) lin_raddr = LIN_AW'(N_MID * N_HID) + LIN_AW'(cnt);
    else                         lin_raddr = LIN_AW'((32'(layer) - 1) * N_HID) + LIN_AW'(cnt);
    busy    = (st != S_IDLE);
    cg_step = (st == S_WAIT_PIX) && pix_done && !cg_last;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; layer <= '0; cnt <= '0; done <= 1'b0;
      rd0_valid <= 1'b0; rd1_valid <= 1'b0;
    end else begin
      done      <= 1'b0;
      rd0_valid <= in_re;
      rd1_valid <= lin_re;
      case (st)
        S_IDLE: if (start) begin
          st <= S_IN_ISSUE; layer <= '0; cnt <= '0;
        end
        S_IN_ISSUE: begin
          cnt <= cnt + 16'd1;
          if (tag_now.last) st <= S_WAIT_VEC;
        end
        S_LIN_ISSUE: begin
          cnt <= cnt + 16'd1;
          if (tag_now.last) st <= (32'(layer) == OUT_LAYER) ? S_WAIT_PIX : S_WAIT_VEC;
        end
        S_WAIT_VEC: if (vec_done) begin
          st <= S_LIN_ISSUE; layer <= layer + LAYER_W'(1); cnt <= '0;
        end
        S_WAIT_PIX: if (pix_done) begin
          cnt <= '0; layer <= '0;
          if (cg_last) st <= S_DONE;
          else         st <= S_IN_ISSUE;
        end
        S_DONE: begin
          done <= 1'b1; st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) if (in_re || lin_re) rd_tag <= tag_now;

  a_issue_excl: assert property (@(posedge clk) disable iff (!rst_n) !(in_re && lin_re));
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) (start |-> !busy));
endmodule
