// tb_adder_tree: back-to-back random 16-input sets (signed 16-bit, with
// occasional all-extreme sets) into a 16-input adder tree; each sum plus
// bias must appear with its tag exactly log2(16)+1 = 5 cycles later, in
// order, one result per cycle.
module tb_adder_tree;
  localparam int N = 16, LAT = 5, NOPS = 200;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N*16-1:0] din;
  logic signed [31:0] bias, sum;
  logic [7:0] tag_in, tag_out;
  int checks = 0, failures = 0, cyc = 0, sent = 0, got = 0;
  int exp_s [NOPS];
  int exp_c [NOPS];

  adder_tree #(.N(N), .IN_W(16), .OUT_W(32), .TAG_W(8)) dut (.clk, .rst_n, .in_valid, .din, .bias, .tag_in,
    .out_valid, .sum, .tag_out);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (sum !== 32'(exp_s[got])) begin failures++; $display("FAIL sum %0d: %0d vs %0d", got, sum, exp_s[got]); end
    if (tag_out !== 8'(got)) begin failures++; $display("FAIL tag"); end
    if (cyc - exp_c[got] != LAT) begin failures++; $display("FAIL lat %0d", cyc - exp_c[got]); end
    got++;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    while (sent < NOPS) begin
      @(negedge clk);
      if (sent > 50 && $urandom_range(3) == 0) in_valid = 0;
      else begin
        int s; s = 0;
        for (int k = 0; k < N; k++) begin
          logic [15:0] d;
          d = (sent % 17 == 0) ? 16'h8000 : (sent % 17 == 1) ? 16'h7fff : 16'($urandom);
          din[k*16 +: 16] = d; s += int'($signed(d));
        end
        bias = 32'($urandom) >>> 4;
        exp_s[sent] = s + int'(bias); exp_c[sent] = cyc; tag_in = 8'(sent);
        in_valid = 1; sent++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++; if (got != NOPS) begin failures++; $display("FAIL count %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
