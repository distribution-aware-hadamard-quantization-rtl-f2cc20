// tb_mac_array: random signed 8-bit weight and activation vectors into an
// 8-lane MAC array; every lane's product and the tag must appear one cycle
// later, and out_valid must follow in_valid.
module tb_mac_array;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N*8-1:0] w, a;
  logic [N*16-1:0] prod;
  logic [3:0] tag_in, tag_out;
  int checks = 0, failures = 0;

  mac_array #(.N(N), .TAG_W(4)) dut (.clk, .rst_n, .in_valid, .w, .a, .tag_in, .out_valid, .prod, .tag_out);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [N*8-1:0] w0, a0; logic v0;
      @(negedge clk);
      w0 = {$urandom, $urandom}; a0 = {$urandom, $urandom};
      if (t % 10 == 0) begin w0[7:0] = 8'h80; a0[7:0] = 8'h80; end   // -128 * -128
      v0 = ($urandom_range(4) != 0);
      w = w0; a = a0; in_valid = v0; tag_in = 4'(t);
      @(posedge clk); #1;
      checks++; if (out_valid !== v0) begin failures++; $display("FAIL valid"); end
      if (v0) begin
        checks++; if (tag_out !== 4'(t)) begin failures++; $display("FAIL tag"); end
        for (int k = 0; k < N; k++) begin
          int e; e = int'($signed(w0[k*8 +: 8])) * int'($signed(a0[k*8 +: 8]));
          checks++;
          if ($signed(prod[k*16 +: 16]) !== 16'(e)) begin failures++; $display("FAIL lane %0d", k); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
