// tb_racam_encoder: drives one-hot match lines for every row with random
// round-key bytes and checks the encoded row, the XOR with the key and the
// four InvMixColumns products against a shift-and-add GF(2^8) multiply; also
// checks that no match gives hit = 0.
module tb_racam_encoder;
  import tb_ref_pkg::*;
  logic [255:0] ml;
  logic [7:0] round_key, row, cam_out;
  logic [7:0] mul [4];
  logic hit;
  int checks = 0, failures = 0;
  localparam logic [7:0] C [4] = '{8'd9, 8'd11, 8'd13, 8'd14};

  racam_encoder dut (.ml, .round_key, .hit, .row, .cam_out, .mul);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      for (int r = 0; r < 256; r++) begin
        logic [7:0] y;
        ml = '0; ml[r] = 1'b1;
        round_key = (rep == 0) ? 8'h00 : 8'($urandom);
        #1;
        y = 8'(r) ^ round_key;
        chk(hit === 1'b1, "hit");
        chk(row === 8'(r), $sformatf("row %0d got %0d", r, row));
        chk(cam_out === y, "cam_out");
        for (int k = 0; k < 4; k++)
          chk(mul[k] === rmul(y, C[k]), $sformatf("mul x%0d of %h", C[k], y));
      end
    end
    ml = '0; #1;
    chk(hit === 1'b0, "no match");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
