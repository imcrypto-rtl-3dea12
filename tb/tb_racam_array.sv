// tb_racam_array: programs the array with the S-box in RAM mode, reads every
// row back, then searches every byte value in CAM mode and checks that the
// encoder returns InvSbox(a) ^ rk and its products by 9, 11, 13, 14 one cycle
// after the search. A table with one value missing checks the no-match case.
module tb_racam_array;
  import tb_ref_pkg::*;
  logic clk = 0, we = 0, re = 0, search_en = 0, cam_hit;
  logic [7:0] addr = 0, wdata = 0, ram_out, search_data = 0, round_key = 0, cam_out;
  logic [7:0] cam_mul [4];
  int checks = 0, failures = 0;
  localparam logic [7:0] C [4] = '{8'd9, 8'd11, 8'd13, 8'd14};

  racam_array dut (.clk, .we, .re, .addr, .wdata, .ram_out,
                   .search_en, .search_data, .round_key, .cam_hit, .cam_out, .cam_mul);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; addr = 8'(i); wdata = rsbox(8'(i));
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); re = 1; addr = 8'(i);
      @(posedge clk); #1; re = 0;
      chk(ram_out === rsbox(8'(i)), $sformatf("RAM read row %0d", i));
    end
    for (int a = 0; a < 256; a++) begin
      logic [7:0] y;
      @(negedge clk); search_en = 1; search_data = 8'(a); round_key = 8'($urandom);
      y = risbox(8'(a)) ^ round_key;
      @(posedge clk); #1; search_en = 0;
      chk(cam_hit === 1'b1, "hit");
      chk(cam_out === y, $sformatf("search %h: %h != %h", a, cam_out, y));
      for (int k = 0; k < 4; k++) chk(cam_mul[k] === rmul(y, C[k]), "product");
      // outputs hold after the search
      search_data = ~search_data;
      @(posedge clk); #1;
      chk(cam_out === y, "cam_out held");
    end
    // remove value 0x63 (row 0) and search for it
    @(negedge clk); we = 1; addr = 8'h00; wdata = rsbox(8'h01);
    @(negedge clk); we = 0; search_en = 1; search_data = 8'h63;
    @(posedge clk); #1; search_en = 0;
    chk(cam_hit === 1'b0, "no match");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
