// tb_lut_fabric_module: programs one LUT fabric module with 1*, 2*, 3*sbox,
// then runs random columns in all four modes and compares each output column
// with the reference (Inv)SubBytes / (Inv)MixColumns / AddRoundKey on a word
// whose column 0 is the input. Checks that valid comes exactly one cycle
// after en.
module tb_lut_fabric_module;
  import tb_ref_pkg::*;
  import imc_pkg::lut_mode_e;
  import imc_pkg::LUT_SUBMX_E;
  import imc_pkg::LUT_SUBMX_D;
  import imc_pkg::LUT_SBOX_E;
  import imc_pkg::LUT_SBOX_D;
  logic clk = 0, rst_n = 1, prog_we = 0, en = 0, valid;
  logic [7:0] prog_addr = 0, prog_s1 = 0, prog_s2 = 0, prog_s3 = 0;
  lut_mode_e mode = LUT_SUBMX_E;
  logic [7:0] col_in [4], rk [4], col_out [4];
  int checks = 0, failures = 0;
  int n_mode [4] = '{0, 0, 0, 0};

  lut_fabric_module dut (.clk, .rst_n, .prog_we, .prog_addr, .prog_s1, .prog_s2, .prog_s3,
                         .en, .mode, .col_in, .rk, .valid, .col_out);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic w128 colw(logic [7:0] c [4]);
    w128 w = '0;
    for (int i = 0; i < 4; i++) w[127 - 8*i -: 8] = c[i];
    return w;
  endfunction

  initial begin
    for (int i = 0; i < 4; i++) begin col_in[i] = 0; rk[i] = 0; end
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); prog_we = 1; prog_addr = 8'(i);
      prog_s1 = rsbox(8'(i)); prog_s2 = rmul(prog_s1, 2); prog_s3 = rmul(prog_s1, 3);
    end
    @(negedge clk); prog_we = 0;
    for (int n = 0; n < 800; n++) begin
      w128 win, wrk, wexp;
      int m;
      m = n % 4;
      mode = lut_mode_e'(m);
      for (int i = 0; i < 4; i++) begin col_in[i] = 8'($urandom); rk[i] = 8'($urandom); end
      win = colw(col_in); wrk = colw(rk);
      unique case (mode)
        LUT_SUBMX_E: wexp = mc(sb(win, 0), 0);
        LUT_SUBMX_D: wexp = mc(sb(win, 1) ^ wrk, 1);
        LUT_SBOX_E:  wexp = sb(win, 0);
        default:     wexp = sb(win, 1);
      endcase
      en = 1;
      @(posedge clk); #1; en = 0;
      checks++;
      if (valid !== 1'b1) begin failures++; $display("valid late"); end
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (col_out[i] !== gb(wexp, i)) begin
          failures++;
          $display("mode %0d byte %0d: %h != %h", m, i, col_out[i], gb(wexp, i));
        end
      end
      n_mode[m]++;
      @(posedge clk); #1;
      checks++;
      if (valid !== 1'b0) begin failures++; $display("valid stuck"); end
      @(negedge clk);
    end
    for (int m = 0; m < 4; m++) if (n_mode[m] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
