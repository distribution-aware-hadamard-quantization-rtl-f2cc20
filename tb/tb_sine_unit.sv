// tb_sine_unit: random pre-activations and per-value random phase scales
// through the sine unit, compared with 2047*sin(2*pi*phase/1024) computed
// with $sin (one-cycle latency, result within one LSB; all four quadrants and
// the table end points are covered by a sweep of the phase).
module tb_sine_unit;
  import dhq_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [31:0] z;
  logic [15:0] mul;
  logic [5:0] sh;
  logic signed [11:0] s;
  int checks = 0, failures = 0;

  sine_unit dut (.clk, .rst_n, .in_valid, .z, .ph_mul(mul), .ph_shift(sh), .out_valid, .s);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic one(int zz, int mm, int ss);
    int e;
    @(negedge clk); z = zz; mul = 16'(mm); sh = 6'(ss); in_valid = 1;
    e = sine_ref(longint'(zz), mm, ss);
    @(posedge clk); #1; in_valid = 0;
    checks += 2;
    if (!out_valid) begin failures++; $display("FAIL valid"); end
    if (int'(s) - e > 1 || e - int'(s) > 1) begin failures++; $display("FAIL z=%0d m=%0d s=%0d got %0d exp %0d", zz, mm, ss, s, e); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = -1100; p < 1100; p++) one(p, 1, 0);          // every phase, negative z too
    for (int k = 0; k < 2000; k++) one(int'($urandom) >>> $urandom_range(20), $urandom_range(65535), $urandom_range(40));
    @(negedge clk); @(posedge clk); #1;
    checks++; if (out_valid) begin failures++; $display("FAIL valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
