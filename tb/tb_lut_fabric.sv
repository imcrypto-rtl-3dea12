// tb_lut_fabric: checks that the reset-time programming takes 256 cycles,
// then runs random 128-bit states in all four modes against the reference
// round functions, with done one cycle after en. An en before ready must be
// ignored.
module tb_lut_fabric;
  import tb_ref_pkg::*;
  import imc_pkg::*;
  logic clk = 0, rst_n = 1, ready, en = 0, done;
  lut_mode_e mode = LUT_SUBMX_E;
  word_t state_in = '0, rk = '0, state_out;
  int checks = 0, failures = 0, cyc = 0;

  lut_fabric dut (.clk, .rst_n, .ready, .en, .mode, .state_in, .rk, .done, .state_out);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // an early request is ignored
    en = 1;
    @(posedge clk); #1; en = 0;
    checks++;
    if (done !== 1'b0) begin failures++; $display("done before ready"); end
    while (!ready) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != 255) begin failures++; $display("programming took %0d cycles", cyc + 1); end
    for (int n = 0; n < 400; n++) begin
      w128 wexp;
      @(negedge clk);
      mode = lut_mode_e'(n % 4);
      state_in = {$urandom, $urandom, $urandom, $urandom};
      rk = {$urandom, $urandom, $urandom, $urandom};
      unique case (mode)
        LUT_SUBMX_E: wexp = mc(sb(state_in, 0), 0);
        LUT_SUBMX_D: wexp = mc(sb(state_in, 1) ^ rk, 1);
        LUT_SBOX_E:  wexp = sb(state_in, 0);
        default:     wexp = sb(state_in, 1);
      endcase
      en = 1;
      @(posedge clk); #1; en = 0;
      checks++;
      if (done !== 1'b1 || state_out !== wexp) begin
        failures++;
        $display("mode %0d: %h != %h (done %b)", mode, state_out, wexp, done);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
