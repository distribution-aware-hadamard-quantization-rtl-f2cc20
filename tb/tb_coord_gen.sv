// tb_coord_gen: drives the coordinate generator over a run of 30 pixels of
// an 8 x 4 image that starts mid-row and wraps past the last row, and checks
// coordinates, raster index, `last` and `active` against the formula.
module tb_coord_gen;
  import dhq_ref_pkg::*;
  localparam int W = 8, H = 4;
  logic clk = 0, rst_n = 0, start = 0, step = 0;
  logic [31:0] first_pix, num_pix, pix_idx;
  logic active, last;
  logic signed [7:0] cx, cy;
  int checks = 0, failures = 0;

  coord_gen #(.IMG_W(W), .IMG_H(H)) dut (.clk, .rst_n, .start, .first_pix, .num_pix, .step,
    .active, .coord_x(cx), .coord_y(cy), .pix_idx, .last);

  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    first_pix = 5; num_pix = 30;
    repeat (2) @(posedge clk); rst_n = 1;
    @(posedge clk); chk(!active, "idle after reset");
    start <= 1; @(posedge clk); start <= 0; #1;
    for (int p = 0; p < 30; p++) begin
      int g, c, r;
      g = 5 + p; c = g % W; r = (g / W) % H;
      chk(active, "active");
      chk(pix_idx == 32'(g), $sformatf("pix_idx %0d", p));
      chk(int'(cx) == coord_ref(c, W), $sformatf("x p%0d got %0d", p, cx));
      chk(int'(cy) == coord_ref(r, H), $sformatf("y p%0d got %0d", p, cy));
      chk(last == (p == 29), "last");
      // hold for a cycle without step on some pixels: outputs must not move
      if (p % 7 == 3) begin @(posedge clk); #1; chk(pix_idx == 32'(g), "hold"); end
      step <= 1; @(posedge clk); step <= 0; #1;
    end
    chk(!active, "inactive after last");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
