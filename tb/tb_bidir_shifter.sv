// tb_bidir_shifter: ShiftRows and InvShiftRows of random states against the
// reference permutation, the FIPS-197 round-1 example, the inverse property,
// and the one-cycle latency.
module tb_bidir_shifter;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 1, en = 0, dir = 0, done;
  logic [127:0] din = '0, dout;
  int checks = 0, failures = 0;

  bidir_shifter dut (.clk, .rst_n, .en, .dir, .din, .done, .dout);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [127:0] x, bit d, output logic [127:0] y);
    @(negedge clk); din = x; dir = d; en = 1;
    @(posedge clk); #1; en = 0;
    checks++;
    if (done !== 1'b1) begin failures++; $display("no done"); end
    y = dout;
    @(posedge clk); #1;
    checks++;
    if (done !== 1'b0) begin failures++; $display("done stuck"); end
  endtask

  initial begin
    logic [127:0] y, z;
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // FIPS-197 Appendix B, round 1: after SubBytes -> after ShiftRows
    run(128'hd42711aee0bf98f1b8b45de51e415230, 0, y);
    checks++;
    if (y !== 128'hd4bf5d30e0b452aeb84111f11e2798e5) begin failures++; $display("FIPS %h", y); end
    for (int n = 0; n < 500; n++) begin
      logic [127:0] x;
      bit d;
      x = {$urandom, $urandom, $urandom, $urandom};
      d = n[0];
      run(x, d, y);
      checks++;
      if (y !== sr(x, d)) begin failures++; $display("dir %0d: %h != %h", d, y, sr(x, d)); end
      run(y, !d, z);
      checks++;
      if (z !== x) begin failures++; $display("not inverse"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
