// tb_quantizer: random values, multipliers and shifts through the quantizer
// (20-bit input), compared with clamp(floor(x*mul/2^shift + 1/2)) computed in
// real arithmetic, together with the saturation flag; includes exact
// rounding ties and both clipping limits.
module tb_quantizer;
  import dhq_ref_pkg::*;
  logic signed [19:0] x;
  logic [15:0] mul;
  logic [5:0] sh;
  logic signed [7:0] q;
  logic sat;
  int checks = 0, failures = 0;

  quantizer #(.IN_W(20)) dut (.x, .mul, .shift(sh), .q, .sat);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic one(int xx, int mm, int ss);
    int e; bit es;
    x = 20'(xx); mul = 16'(mm); sh = 6'(ss); #1;
    e = quant_ref(longint'($signed(20'(xx))), mm, ss, 8, es);
    checks += 2;
    if (int'(q) != e) begin failures++; $display("FAIL x=%0d m=%0d s=%0d got %0d exp %0d", xx, mm, ss, q, e); end
    if (sat != es) begin failures++; $display("FAIL sat x=%0d", xx); end
  endtask

  initial begin
    one(3, 1, 1); one(-3, 1, 1); one(5, 1, 1); one(-5, 1, 1);     // ties: 1.5 -> 2, -1.5 -> -1
    one(127, 1, 0); one(128, 1, 0); one(-128, 1, 0); one(-129, 1, 0);
    one(524287, 65535, 0); one(-524288, 65535, 0);
    for (int k = 0; k < 5000; k++) one(int'($urandom), $urandom_range(65535), $urandom_range(40));
    for (int k = 0; k < 2000; k++) one(int'($urandom) >>> 12, $urandom_range(300), $urandom_range(12));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
