// lut_fabric: the LUT fabric block, four LUT fabric modules side by side.
//
// Module j computes state column j (bytes 4j..4j+3 of the 128-bit word), so a
// whole round's (Inv)SubBytes+(Inv)MixColumns is done at once. The round key
// word is split the same way (used only in LUT_SUBMX_D).
//
// Table programming: the arrays are volatile SRAM, so after reset a sequencer
// writes rows 0..255 of every array with sbox(x), 2*sbox(x) and 3*sbox(x)
// (sbox is computed by imc_pkg::sbox). That takes 256 cycles; ready then goes
// high and stays high. Encryption and decryption use the same contents, so
// switching between them needs no reprogramming.
//
// Interface/timing: with ready high, en starts an operation on state_in;
// done pulses one cycle later with state_out valid (held until the next en).
// An en before ready is ignored.
//
// The four modules working in parallel on the four columns and the shared,
// never-reprogrammed contents are the paper's; the reset-time programming
// sequencer is this design's choice (the paper does not say how the tables
// are loaded).
//
// Lint reports rst_n as used both asynchronously and synchronously: the
// flip-flops reset asynchronously, and the same signal disables the
// assertions of the sub-blocks during reset (disable iff), which is intended.
module lut_fabric
  import imc_pkg::*;
#(
  parameter int unsigned N_MODULES = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      ready,
  input  logic      en,
  input  lut_mode_e mode,
  input  word_t     state_in,
  input  word_t     rk,
  output logic      done,
  output word_t     state_out
);

  // ------------------------------------------------ programming sequencer
  logic [8:0] prog_cnt;
  logic       prog_we;
  byte_t      prog_addr, p1, p2, p3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prog_cnt <= '0;
    else if (!prog_cnt[8]) prog_cnt <= prog_cnt + 1'b1;
  end

  assign ready     = prog_cnt[8];
  assign prog_we   = !prog_cnt[8];
  assign prog_addr = prog_cnt[7:0];
  assign p1        = sbox(prog_addr);
  assign p2        = xtime(p1);
  assign p3        = p2 ^ p1;

  logic go;
  assign go = en && ready;

  logic vld [N_MODULES];

  for (genvar j = 0; j < N_MODULES; j++) begin : g_mod
    byte_t cin [4], ck [4], cout [4];
    for (genvar i = 0; i < 4; i++) begin : g_b
      assign cin[i] = get_byte(state_in, 4*j + i);
      assign ck[i]  = get_byte(rk, 4*j + i);
      assign state_out[127 - 8*(4*j + i) -: 8] = cout[i];
    end
    lut_fabric_module u_mod (
      .clk       (clk),
      .rst_n     (rst_n),
      .prog_we   (prog_we),
      .prog_addr (prog_addr),
      .prog_s1   (p1),
      .prog_s2   (p2),
      .prog_s3   (p3),
      .en        (go),
      .mode      (mode),
      .col_in    (cin),
      .rk        (ck),
      .valid     (vld[j]),
      .col_out   (cout)
    );
  end

  assign done = vld[0];

endmodule
