// tb_mem_ctrl: the memory controller at N_HID = 4, N_MID = 2, OUT_CH = 2
// over a 3-pixel job, with the Sine-and-Quant completions (vec_done,
// pix_done) returned after random delays. It checks the exact sequence of
// read requests (RAM, address, Intermediate RAM bank, tag), the one-cycle
// delayed valid/tag copies, the coordinate steps, that nothing is issued
// while waiting, and a single done pulse at the end.
module tb_mem_ctrl;
  import dhq_pkg::*;
  localparam int N = 4, NM = 2, OC = 2, NPIX = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, done, cg_last, cg_step;
  logic in_re, lin_re, act_re, act_rbank, rd0_valid, rd1_valid;
  logic [1:0] in_raddr;
  logic [3:0] lin_raddr;
  op_tag_t rd_tag;
  logic vec_done = 0, pix_done = 0;
  int checks = 0, failures = 0, pix = 0, steps = 0, dones = 0;

  mem_ctrl #(.N_HID(N), .N_MID(NM), .OUT_CH(OC)) dut (.clk, .rst_n, .start, .busy, .done, .cg_last, .cg_step,
    .in_re, .in_raddr, .lin_re, .lin_raddr, .act_re, .act_rbank, .rd0_valid, .rd1_valid, .rd_tag,
    .vec_done, .pix_done);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  assign cg_last = (pix == NPIX - 1);
  always @(posedge clk) if (cg_step) begin pix <= pix + 1; steps <= steps + 1; end
  always @(posedge clk) if (done) dones <= dones + 1;

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Expect `cnt` consecutive issue cycles of `layer`, then wait and respond.
  task automatic expect_layer(int layer);
    int cnt; cnt = (layer == NM + 1) ? OC : N;
    for (int i = 0; i < cnt; i++) begin
      #1;
      if (layer == 0) begin
        chk(in_re && !lin_re && !act_re, $sformatf("input issue L%0d i%0d", layer, i));
        chk(in_raddr == 2'(i), "in_raddr");
      end else begin
        int row; row = (layer == NM + 1) ? NM * N + i : (layer - 1) * N + i;
        chk(lin_re && act_re && !in_re, $sformatf("linear issue L%0d i%0d", layer, i));
        chk(lin_raddr == 4'(row), $sformatf("lin_raddr L%0d i%0d got %0d", layer, i, lin_raddr));
        chk(act_rbank == 1'((layer - 1) % 2), "act bank");
      end
      @(posedge clk); #1;
      chk((layer == 0 ? rd0_valid : rd1_valid), "delayed valid");
      chk(rd_tag.layer == 3'(layer) && rd_tag.idx == 16'(i) && rd_tag.last == (i == cnt - 1), "tag");
    end
    // waiting: nothing issued for a random time
    repeat ($urandom_range(1, 6)) begin
      chk(!in_re && !lin_re && busy, "idle while waiting"); @(posedge clk); #1;
    end
    if (layer == NM + 1) pix_done = 1; else vec_done = 1;
    @(posedge clk); #1; pix_done = 0; vec_done = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(posedge clk); #1; chk(!busy, "idle");
    start = 1; @(posedge clk); #1; start = 0;
    for (int p = 0; p < NPIX; p++) begin
      for (int l = 0; l <= NM + 1; l++) expect_layer(l);
      chk(pix == ((p < NPIX - 1) ? p + 1 : p), "coordinate step");
    end
    #1; chk(!in_re, "no issue after last pixel");
    repeat (3) @(posedge clk); #1;
    chk(dones == 1, $sformatf("done pulses %0d", dones));
    chk(steps == NPIX - 1, "steps");
    chk(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
