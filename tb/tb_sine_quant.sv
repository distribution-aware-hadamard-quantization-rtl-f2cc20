// tb_sine_quant: the Sine-and-Quant stage at N_HID = 8 with one hidden
// layer (layers 0, 1 and output layer 2). It sends
//   layer 0 through the input-layer port, Hadamard on,
//   layer 1 through the linear-layer port with gaps, Hadamard off,
//   the 3 output values of layer 2 (no sine) to Result RAM base 5,
// and compares the written vectors, banks, result addresses and values, the
// saturation flag and the latency (4 cycles after the last value, plus
// log2(8)+1 with the Hadamard transform) with an independent model.
module tb_sine_quant;
  import dhq_pkg::*;
  import dhq_ref_pkg::*;
  localparam int N = 8, NM = 1, NL = 3, OC = 3, L = 3;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg [NL];
  logic in0_valid = 0, in1_valid = 0;
  logic signed [31:0] in0_z, in1_z;
  op_tag_t in0_tag, in1_tag;
  logic [7:0] res_base = 8'd5;
  logic act_we, act_wbank, vec_done, res_we, pix_done, q_sat;
  logic [N*8-1:0] act_wdata;
  logic [7:0] res_waddr, res_wdata;
  int checks = 0, failures = 0, cyc = 0;

  sine_quant #(.N_HID(N), .N_MID(NM), .RES_AW(8)) dut (.clk, .rst_n, .cfg,
    .in0_valid, .in0_z, .in0_tag, .in1_valid, .in1_z, .in1_tag, .res_base,
    .act_we, .act_wbank, .act_wdata, .vec_done, .res_we, .res_waddr, .res_wdata, .pix_done, .q_sat);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Sends one hidden layer and checks the vector written for it.
  task automatic hidden_layer(int layer, bit port1, bit gaps);
    int z [N]; int s [N]; int e [N]; bit esat, sat1; int t_last, lat;
    for (int i = 0; i < N; i++) begin
      z[i] = int'($urandom) >>> 14;
      s[i] = sine_ref(longint'(z[i]), int'(cfg[layer].ph_mul), int'(cfg[layer].ph_shift));
    end
    esat = 0;
    for (int i = 0; i < N; i++) begin
      int h; h = 0;
      if (cfg[layer].had_en) for (int j = 0; j < N; j++) h += had_sign(i, j) * s[j];
      else h = s[i];
      e[i] = quant_ref(longint'(h), int'(cfg[layer].q_mul), int'(cfg[layer].q_shift), 8, sat1);
      esat |= sat1;
    end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      while (gaps && $urandom_range(2) == 0) begin in0_valid = 0; in1_valid = 0; @(negedge clk); end
      if (port1) begin in1_valid = 1; in1_z = z[i]; in1_tag = '{layer: 3'(layer), idx: 16'(i), last: (i == N - 1)}; end
      else       begin in0_valid = 1; in0_z = z[i]; in0_tag = '{layer: 3'(layer), idx: 16'(i), last: (i == N - 1)}; end
      t_last = cyc;
    end
    @(negedge clk); in0_valid = 0; in1_valid = 0;
    while (!act_we) @(negedge clk);
    lat = cyc - t_last;
    chk(lat == 4 + (cfg[layer].had_en ? L + 1 : 0), $sformatf("layer %0d latency %0d", layer, lat));
    chk(vec_done, "vec_done with write");
    chk(act_wbank == 1'(layer), "bank");
    chk(q_sat == esat, $sformatf("sat flag %0d vs %0d", q_sat, esat));
    for (int i = 0; i < N; i++)
      chk(int'($signed(act_wdata[i*8 +: 8])) == e[i],
          $sformatf("L%0d elem %0d got %0d exp %0d", layer, i, $signed(act_wdata[i*8 +: 8]), e[i]));
    @(negedge clk); chk(!act_we && !vec_done, "single write pulse");
  endtask

  initial begin
    cfg[0] = '{ph_mul: 16'd3, ph_shift: 6'd2, q_mul: 16'd1, q_shift: 6'd5, had_en: 1'b1};
    cfg[1] = '{ph_mul: 16'd1, ph_shift: 6'd0, q_mul: 16'd3, q_shift: 6'd6, had_en: 1'b0};
    cfg[2] = '{ph_mul: 16'd0, ph_shift: 6'd0, q_mul: 16'd1, q_shift: 6'd8, had_en: 1'b0};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      hidden_layer(0, 0, 0);
      hidden_layer(1, 1, 1);
      // output layer
      for (int c = 0; c < OC; c++) begin
        int zz, e; bit es;
        zz = (c == 0) ? 200000 : int'($urandom) >>> 16;
        e = quant_ref(longint'(zz), 1, 8, 8, es);
        @(negedge clk); in1_valid = 1; in1_z = zz; in1_tag = '{layer: 3'd2, idx: 16'(c), last: (c == OC - 1)};
        @(negedge clk); in1_valid = 0;
        chk(res_we, "res_we");
        chk(res_waddr == 8'(5 + c), "res addr");
        chk(int'($signed(res_wdata)) == e, $sformatf("res %0d got %0d exp %0d", c, $signed(res_wdata), e));
        chk(pix_done == (c == OC - 1), "pix_done");
        chk(q_sat == es, "out sat");
        chk(!act_we, "no act write for output layer");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
