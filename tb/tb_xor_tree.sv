// tb_xor_tree: random terms, each output byte compared with the XOR of its
// four terms computed in the testbench.
module tb_xor_tree;
  logic [7:0] terms [4][4];
  logic [7:0] sum [4];
  int checks = 0, failures = 0;

  xor_tree dut (.terms, .sum);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < 4; i++) for (int k = 0; k < 4; k++) terms[i][k] = 8'($urandom);
      #1;
      for (int i = 0; i < 4; i++) begin
        logic [7:0] e;
        e = 0;
        for (int k = 0; k < 4; k++) e = e ^ terms[i][k];
        checks++;
        if (sum[i] !== e) begin failures++; $display("row %0d: %h != %h", i, sum[i], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
