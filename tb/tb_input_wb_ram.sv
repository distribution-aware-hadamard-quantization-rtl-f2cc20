// tb_input_wb_ram: fills the input-layer Weight & Bias RAM with random
// words, reads them back in a shuffled order and checks data and the
// one-cycle read latency.
module tb_input_wb_ram;
  localparam int N = 16, DW = 48;
  logic clk = 0, we = 0, re = 0;
  logic [3:0] waddr, raddr;
  logic [DW-1:0] wdata, rdata;
  logic [DW-1:0] model [N];
  int checks = 0, failures = 0;

  input_wb_ram #(.N_HID(N)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < N; i++) begin
      model[i] = {$urandom, $urandom};
      @(negedge clk); we = 1; waddr = 4'(i); wdata = model[i];
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 3 * N; k++) begin
      int a; a = $urandom_range(N - 1);
      re = 1; raddr = 4'(a);
      @(posedge clk); #1; re = 0;
      checks++; if (rdata !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
      // read disabled: output holds
      @(posedge clk); #1;
      checks++; if (rdata !== model[a]) begin failures++; $display("FAIL hold %0d", a); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
