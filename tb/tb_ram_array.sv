// tb_ram_array: fills all 256 rows of a ram_array with random bytes, reads
// them back, and checks the one-cycle read latency and that rdata holds while
// re is low.
module tb_ram_array;
  logic clk = 0, we = 0, re = 0;
  logic [7:0] addr = 0, wdata = 0, rdata;
  logic [7:0] model [256];
  int checks = 0, failures = 0;

  ram_array dut (.clk, .we, .re, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) model[i] = 8'($urandom);
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; addr = 8'(i); wdata = model[i];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 600; n++) begin
      int a = $urandom_range(0, 255);
      @(negedge clk); re = 1; addr = 8'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("row %0d: %h != %h", a, rdata, model[a]); end
      re = 0; addr = ~addr;
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("rdata not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
