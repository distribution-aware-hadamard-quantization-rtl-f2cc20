// tb_intermediate_ram: ping-pong use of the two banks of a 16-element
// Intermediate RAM: each round writes one bank while the other is read, and
// checks that the read bank still holds its older vector (one-cycle read).
module tb_intermediate_ram;
  localparam int N = 16;
  logic clk = 0, we = 0, re = 0, wbank = 0, rbank = 0;
  logic [N*8-1:0] wdata, rdata;
  logic [N*8-1:0] model [2];
  int checks = 0, failures = 0;

  intermediate_ram #(.N_HID(N)) dut (.clk, .we, .wbank, .wdata, .re, .rbank, .rdata);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int b = 0; b < 2; b++) begin
      model[b] = {4{$urandom}};
      @(negedge clk); we = 1; wbank = 1'(b); wdata = model[b];
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < 40; r++) begin
      int wb; wb = r % 2;
      // write bank wb and read bank !wb in the same cycle
      model[wb] = {4{$urandom}};
      @(negedge clk); we = 1; wbank = 1'(wb); wdata = model[wb]; re = 1; rbank = 1'(1 - wb);
      @(posedge clk); #1; we = 0; re = 0;
      checks++; if (rdata !== model[1 - wb]) begin failures++; $display("FAIL other bank r%0d", r); end
      @(negedge clk); re = 1; rbank = 1'(wb);
      @(posedge clk); #1; re = 0;
      checks++; if (rdata !== model[wb]) begin failures++; $display("FAIL new data r%0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
