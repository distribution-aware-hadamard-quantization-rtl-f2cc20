// tb_result_ram: random writes into a 64-entry Result RAM while the host
// port reads other addresses; every read returns the last value written
// there, one cycle after the address.
module tb_result_ram;
  localparam int D = 64;
  logic clk = 0, we = 0;
  logic [5:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  logic [7:0] model [D];
  int checks = 0, failures = 0;

  result_ram #(.DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < D; i++) begin
      model[i] = 8'($urandom);
      @(negedge clk); we = 1; waddr = 6'(i); wdata = model[i];
    end
    for (int k = 0; k < 300; k++) begin
      int a, w;
      a = $urandom_range(D - 1); w = $urandom_range(D - 1);
      @(negedge clk);
      raddr = 6'(a);
      we = (w != a) && ($urandom_range(1) == 1); waddr = 6'(w); wdata = 8'($urandom);
      @(posedge clk); #1;
      checks++; if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      if (we) model[w] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
