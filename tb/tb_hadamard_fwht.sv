// tb_hadamard_fwht: random 16-element vectors (and an all-extreme one)
// through the fast Walsh-Hadamard transform; the result is compared with
// the matrix product by H_16, entries (-1)^popcount(i&j), and `done` must
// come exactly log2(16) = 4 cycles after `start`. A second start while the
// result is held checks that vout stays until then.
module tb_hadamard_fwht;
  import dhq_ref_pkg::*;
  localparam int N = 16, IW = 12, OW = 16, L = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [N*IW-1:0] vin;
  logic [N*OW-1:0] vout;
  int checks = 0, failures = 0;

  hadamard_fwht #(.N(N), .IN_W(IW)) dut (.clk, .rst_n, .start, .vin, .busy, .done, .vout);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int x [N]; int n;
      for (int i = 0; i < N; i++) begin
        x[i] = (t == 0) ? -2048 : (t == 1) ? 2047 : $urandom_range(4095) - 2048;
        vin[i*IW +: IW] = IW'(x[i]);
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0; vin = '0;
      n = 1;
      while (!done && n < 20) begin @(negedge clk); n++; end
      checks++; if (n != L + 1) begin failures++; $display("FAIL done after %0d cycles", n); end
      repeat ($urandom_range(3)) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        int e; e = 0;
        for (int j = 0; j < N; j++) e += had_sign(i, j) * x[j];
        checks++;
        if (int'($signed(vout[i*OW +: OW])) != e) begin failures++; $display("FAIL t%0d i%0d %0d vs %0d", t, i, $signed(vout[i*OW +: OW]), e); end
      end
      checks++; if (busy) begin failures++; $display("FAIL busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
