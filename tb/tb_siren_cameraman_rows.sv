// tb_siren_cameraman_rows: end-to-end test of the whole accelerator on the cameraman-sized workload: default sizes, the first four rows
// (1024 pixels) of the 256 x 256 image in one job in DHQ mode. The weights are random,
// since no trained network ships with the design.
// Random int8 weights and int32 biases are loaded through the host ports,
// then one job runs with the Hadamard transform on after every hidden layer
// (the DHQ mode). Each output value read back from the Result RAM is compared
// with a bit-exact model of the network written with plain integer and real
// arithmetic (matrix-product Hadamard, $sin sine), and so is the number of
// clipped-value events. Each job's cycle count from start to done is checked
// against 1 + P*T_pix + 1, with
//   T_pix = (N+8) + N_MID*(N+L+7) + (OUT_CH+L+4) + (L+1)*(vectors transformed)
// where L = log2(N). The test also counts the mechanisms it exercised
// (Hadamard runs, bypassed vectors, both Intermediate RAM banks, clipping,
// output-layer writes, a row change of the coordinate generator) and fails
// if any never happened.
module tb_siren_cameraman_rows;
  import dhq_pkg::*;
  import dhq_ref_pkg::*;
  localparam int N = 256, NM = 3, OC = 1, IW = 256, IH = 256;
  localparam int NL = NM + 2, L = $clog2(N), D = NM * N + OC, RD = IW * IH * OC;
  localparam int RAW = (RD > 1) ? $clog2(RD) : 1;

  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg [NL];
  logic in_we = 0, lin_we = 0, start = 0, busy, done, q_sat;
  logic [$clog2(N)-1:0] in_waddr;
  logic [47:0] in_wdata;
  logic [$clog2(D)-1:0] lin_waddr;
  logic [N*8-1:0] lin_wdata_w;
  logic [31:0] lin_wdata_b, first_pix, num_pix;
  logic [RAW-1:0] res_raddr;
  logic [7:0] res_rdata;

  dhq_inr_top dut (.clk, .rst_n, .cfg, .in_we, .in_waddr, .in_wdata, .lin_we, .lin_waddr,
    .lin_wdata_w, .lin_wdata_b, .start, .first_pix, .num_pix, .busy, .done, .q_sat, .res_raddr, .res_rdata);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #(10 * 5000000); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // weights of the model
  int w_in [N][2];
  int b_in [N];
  int w_lin [D][N];
  int b_lin [D];
  int exp_res [RD];
  int exp_sat = 0;

  // mechanism counters
  int n_clip_total = 0;
  int n_had = 0, n_bypass = 0, n_bank0 = 0, n_bank1 = 0, n_sat = 0, n_outw = 0, n_rowchg = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_sq.u_had.done) n_had++;
    if (dut.act_we && !dut.u_sq.had_sel) n_bypass++;
    if (dut.act_we && !dut.act_wbank) n_bank0++;
    if (dut.act_we && dut.act_wbank) n_bank1++;
    if (q_sat) begin n_sat++; n_clip_total++; end
    if (dut.res_we) n_outw++;
    if (dut.cg_step && dut.pix_idx % IW == IW - 1) n_rowchg++;
  end

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // sine -> (Hadamard) -> quantize, as the design's formulas define it
  task automatic act_vec(int layer, int z [N], output int a [N]);
    int s [N]; bit st, any;
    for (int j = 0; j < N; j++) s[j] = sine_ref(longint'(z[j]), int'(cfg[layer].ph_mul), int'(cfg[layer].ph_shift));
    any = 0;
    for (int i = 0; i < N; i++) begin
      longint h; h = 0;
      if (cfg[layer].had_en) for (int j = 0; j < N; j++) h += longint'(had_sign(i, j) * s[j]);
      else h = longint'(s[i]);
      a[i] = quant_ref(h, int'(cfg[layer].q_mul), int'(cfg[layer].q_shift), 8, st);
      any |= st;
    end
    if (any) exp_sat++;
  endtask

  task automatic model_pixel(int p);
    int cx, cy; int z [N]; int a [N]; int a2 [N]; bit st;
    cx = coord_ref(p % IW, IW); cy = coord_ref((p / IW) % IH, IH);
    for (int j = 0; j < N; j++) z[j] = cx * w_in[j][0] + cy * w_in[j][1] + b_in[j];
    act_vec(0, z, a);
    for (int l = 1; l <= NM; l++) begin
      for (int j = 0; j < N; j++) begin
        int acc; acc = b_lin[(l - 1) * N + j];
        for (int k = 0; k < N; k++) acc += w_lin[(l - 1) * N + j][k] * a[k];
        z[j] = acc;
      end
      act_vec(l, z, a2);
      a = a2;
    end
    for (int c = 0; c < OC; c++) begin
      int acc; acc = b_lin[NM * N + c];
      for (int k = 0; k < N; k++) acc += w_lin[NM * N + c][k] * a[k];
      exp_res[p * OC + c] = quant_ref(longint'(acc), int'(cfg[NL-1].q_mul), int'(cfg[NL-1].q_shift), 8, st);
      if (st) exp_sat++;
    end
  endtask

  task automatic run_job(int fp, int np, bit had);
    longint t0, t; int tpix, nvec;
    for (int l = 0; l <= NM; l++) cfg[l].had_en = had;
    exp_sat = 0; n_sat = 0;
    for (int p = fp; p < fp + np; p++) model_pixel(p);
    @(negedge clk); first_pix = 32'(fp); num_pix = 32'(np); start = 1;
    t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t = cyc - t0;
    nvec = had ? NM + 1 : 0;
    tpix = (N + 8) + NM * (N + L + 7) + (OC + L + 4) + (L + 1) * nvec;
    $display("job fp=%0d np=%0d had=%0d: %0d cycles, %0d per pixel", fp, np, had, t, tpix);
    chk(t == longint'(1 + np * tpix + 1), $sformatf("job cycles %0d expected %0d", t, 1 + np * tpix + 1));
    @(negedge clk);
    chk(!busy, "idle after done");
    chk(n_sat == exp_sat, $sformatf("clip events %0d expected %0d", n_sat, exp_sat));
    for (int a = fp * OC; a < (fp + np) * OC; a++) begin
      res_raddr = RAW'(a); @(negedge clk);
      chk(int'($signed(res_rdata)) == exp_res[a], $sformatf("result %0d got %0d exp %0d", a, $signed(res_rdata), exp_res[a]));
    end
  endtask

  initial begin
    // scales chosen so that values fill the int8 range with some clipping
    cfg[0] = '{ph_mul: 16'd1, ph_shift: 6'd4, q_mul: 16'd1, q_shift: 6'(4 + L / 2), had_en: 1'b1};
    for (int l = 1; l <= NM; l++)
      cfg[l] = '{ph_mul: 16'd1, ph_shift: 6'(3 + L / 2), q_mul: 16'd1, q_shift: 6'(4 + L / 2), had_en: 1'b1};
    cfg[NL-1] = '{ph_mul: 16'd0, ph_shift: 6'd0, q_mul: 16'd1, q_shift: 6'(6 + L / 2), had_en: 1'b0};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int j = 0; j < N; j++) begin
      w_in[j][0] = int'($signed(8'($urandom))); w_in[j][1] = int'($signed(8'($urandom)));
      b_in[j] = $urandom_range(4000) - 2000;
      @(negedge clk); in_we = 1; in_waddr = $clog2(N)'(j);
      in_wdata = {8'(w_in[j][0]), 8'(w_in[j][1]), 32'(b_in[j])};
    end
    @(negedge clk); in_we = 0;
    for (int r = 0; r < D; r++) begin
      for (int k = 0; k < N; k++) begin
        w_lin[r][k] = int'($signed(8'($urandom)));
        lin_wdata_w[k*8 +: 8] = 8'(w_lin[r][k]);
      end
      b_lin[r] = $urandom_range(20000) - 10000;
      lin_wdata_b = 32'(b_lin[r]);
      lin_waddr = $clog2(D)'(r); lin_we = 1;
      @(negedge clk);
    end
    lin_we = 0;
    run_job(0, 1024, 1'b1);
    if (0 > 0) run_job(0, 0, 1'b0);
    $display("mechanisms: hadamard=%0d bypass=%0d bank0=%0d bank1=%0d clip=%0d out_writes=%0d row_changes=%0d",
             n_had, n_bypass, n_bank0, n_bank1, n_clip_total, n_outw, n_rowchg);
    chk(n_had > 0, "Hadamard transform never ran");
    if (0 > 0) chk(n_bypass > 0, "Hadamard bypass never used");
    chk(n_clip_total > 0, "quantizer never clipped");
    chk(n_bank0 > 0 && n_bank1 > 0, "both Intermediate RAM banks used");
    chk(n_outw == (1024 + 0) * OC, "output-layer writes");
    chk(n_rowchg > 0, "coordinate generator never changed row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
