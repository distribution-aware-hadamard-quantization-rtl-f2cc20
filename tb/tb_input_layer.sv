// tb_input_layer: streams random coordinate / weight / bias sets into the
// input layer, one per cycle with random gaps, and checks that each
// pre-activation x*wx + y*wy + bias appears with its tag exactly three
// cycles after it entered.
module tb_input_layer;
  localparam int LAT = 3, NOPS = 300;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] cx, cy;
  logic [47:0] wb;
  logic [7:0] tag_in, tag_out;
  logic signed [31:0] z;
  int checks = 0, failures = 0, cyc = 0, sent = 0, got = 0;
  int exp_z [NOPS];
  int exp_cyc [NOPS];

  input_layer #(.TAG_W(8)) dut (.clk, .rst_n, .in_valid, .coord_x(cx), .coord_y(cy),
    .wb_word(wb), .tag_in, .out_valid, .z, .tag_out);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (z !== 32'(exp_z[got])) begin failures++; $display("FAIL z %0d: %0d vs %0d", got, z, exp_z[got]); end
    if (tag_out !== 8'(got)) begin failures++; $display("FAIL tag %0d", got); end
    if (cyc - exp_cyc[got] != LAT) begin failures++; $display("FAIL latency %0d", cyc - exp_cyc[got]); end
    got++;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    while (sent < NOPS) begin
      @(negedge clk);
      if ($urandom_range(3) != 0) begin
        logic signed [7:0] wx, wy; logic signed [31:0] b;
        wx = 8'($urandom); wy = 8'($urandom); b = 32'($urandom) >>> 8;
        cx = 8'($urandom); cy = 8'($urandom);
        wb = {wx, wy, b}; tag_in = 8'(sent); in_valid = 1;
        exp_z[sent] = int'(cx) * int'(wx) + int'(cy) * int'(wy) + int'(b);
        exp_cyc[sent] = cyc;
        sent++;
      end else in_valid = 0;
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++; if (got != NOPS) begin failures++; $display("FAIL count %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
