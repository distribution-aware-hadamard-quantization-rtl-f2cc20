// tb_linear_layer: a 16-lane linear layer fed one random weight row, bias
// and activation vector per cycle; each dot product plus bias must appear
// with its tag 1 + log2(16) + 1 = 6 cycles later.
module tb_linear_layer;
  localparam int N = 16, LAT = 6, NOPS = 200;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N*8-1:0] w, a;
  logic [31:0] bias;
  logic signed [31:0] z;
  logic [7:0] tag_in, tag_out;
  int checks = 0, failures = 0, cyc = 0, sent = 0, got = 0;
  int exp_z [NOPS];
  int exp_c [NOPS];

  linear_layer #(.N_HID(N), .TAG_W(8)) dut (.clk, .rst_n, .in_valid, .w_row(w), .bias, .act(a), .tag_in,
    .out_valid, .z, .tag_out);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (z !== 32'(exp_z[got])) begin failures++; $display("FAIL z %0d", got); end
    if (tag_out !== 8'(got)) begin failures++; $display("FAIL tag"); end
    if (cyc - exp_c[got] != LAT) begin failures++; $display("FAIL lat %0d", cyc - exp_c[got]); end
    got++;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    while (sent < NOPS) begin
      @(negedge clk);
      if ($urandom_range(4) == 0) in_valid = 0;
      else begin
        int s; s = 0;
        for (int k = 0; k < N; k++) begin
          w[k*8 +: 8] = 8'($urandom); a[k*8 +: 8] = 8'($urandom);
          s += int'($signed(w[k*8 +: 8])) * int'($signed(a[k*8 +: 8]));
        end
        bias = 32'($signed(32'($urandom)) >>> 6);
        exp_z[sent] = s + int'($signed(bias)); exp_c[sent] = cyc; tag_in = 8'(sent);
        in_valid = 1; sent++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (12) @(posedge clk);
    checks++; if (got != NOPS) begin failures++; $display("FAIL count %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
