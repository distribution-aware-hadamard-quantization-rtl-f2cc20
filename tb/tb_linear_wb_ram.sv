// tb_linear_wb_ram: writes random weight rows and biases into every row of
// a small linear Weight & Bias RAM (N_HID = 8, N_MID = 3, OUT_CH = 3, so 27
// rows), reads them back in random order and checks data and the one-cycle
// latency, including the output-layer rows at the top of the map.
module tb_linear_wb_ram;
  localparam int N = 8, NM = 3, OC = 3, D = NM * N + OC;
  logic clk = 0, we = 0, re = 0;
  logic [4:0] waddr, raddr;
  logic [N*8-1:0] ww, rw;
  logic [31:0] wb, rb;
  logic [N*8-1:0] mw [D];
  logic [31:0] mb [D];
  int checks = 0, failures = 0;

  linear_wb_ram #(.N_HID(N), .N_MID(NM), .OUT_CH(OC)) dut (.clk, .we, .waddr, .wdata_w(ww), .wdata_b(wb),
    .re, .raddr, .rdata_w(rw), .rdata_b(rb));
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < D; i++) begin
      mw[i] = {$urandom, $urandom}; mb[i] = $urandom;
      @(negedge clk); we = 1; waddr = 5'(i); ww = mw[i]; wb = mb[i];
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 4 * D; k++) begin
      int a; a = (k < D) ? D - 1 - k : $urandom_range(D - 1);
      re = 1; raddr = 5'(a);
      @(posedge clk); #1; re = 0;
      checks += 2;
      if (rw !== mw[a]) begin failures++; $display("FAIL w row %0d", a); end
      if (rb !== mb[a]) begin failures++; $display("FAIL b row %0d", a); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
