// tb_aes_workloads: the AES workloads on the whole fabric at its default
// size (1 MB CEM, 65,536 words).
//
// 1. AES-128 ECB over blocks spread across the entire CEM, words 64 to 65,535.
//    The step instructions (SFTR, SUBMX, SBOX) carry a 12-bit word address,
//    so they reach only words 0..4095 directly. A block stored above that is
//    swapped into a working word of the low window with three IMXOR
//    instructions (R-type instructions address every word through
//    registers). It is then encrypted there and swapped back. Blocks inside
//    the window are processed in place. Plaintexts go in and ciphertexts come
//    out through the cache-side port. A second pass decrypts everything.
// 2. AES-192 and AES-256 (12 and 14 rounds). The fabric has no round counter:
//    the testbench, playing the core, computes the longer key schedules and
//    issues one more IMSUBMX per extra round. The testbench checks:
//    - the FIPS-197 Appendix C.2 and C.3 vectors
//    - random keys and blocks, encrypted and then decrypted
//
// The testbench plays the RISC-V core (register file, round keys, one custom
// instruction at a time). It checks results against tb_ref_pkg. It counts from
// the design's signals:
// - how many IMSUBMX steps each AES variant used (nr - 1 per block)
// - that both a window swap and an in-place block occurred
module tb_aes_workloads;
  import tb_ref_pkg::*;
  import imc_pkg::*;

  logic clk = 0, rst_n = 1;
  logic instr_valid = 0, instr_ready, instr_done, instr_illegal;
  logic [31:0] instr = 0;
  logic [4:0] rf_raddr [4];
  logic [31:0] rf_rdata [4];
  logic rf_we;
  logic [4:0] rf_waddr;
  word_t rf_wdata;
  logic ext_req = 0, ext_we = 0, ext_ack;
  logic [15:0] ext_addr = 0;
  word_t ext_wdata = '0, ext_rdata;
  logic lut_ready;
  int checks = 0, failures = 0;

  imcrypto_top dut (.*);
  always #5 clk = ~clk;

  logic [31:0] xr [32];
  always_comb for (int i = 0; i < 4; i++) rf_rdata[i] = xr[rf_raddr[i]];
  always @(posedge clk)
    if (rf_we) for (int i = 0; i < 4; i++) xr[5'(rf_waddr + 5'(i))] <= rf_wdata[127 - 32*i -: 32];

  // IMSUBMX steps seen by the LUT fabric (encryption / decryption)
  int n_submx_e = 0, n_submx_d = 0;
  always @(posedge clk) if (rst_n && dut.u_lut.en && dut.u_lut.ready) begin
    if (dut.u_lut.mode == LUT_SUBMX_E) n_submx_e++;
    if (dut.u_lut.mode == LUT_SUBMX_D) n_submx_d++;
  end
  int n_swapped = 0, n_inplace = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic exec(logic [31:0] ins);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = ins; instr_valid = 1;
    @(posedge clk); #1; instr_valid = 0;
    while (!instr_done) begin @(posedge clk); #1; end
  endtask

  task automatic set4(int base, word_t w);
    for (int i = 0; i < 4; i++) xr[base + i] = w[127 - 32*i -: 32];
  endtask

  task automatic text_s(word_t w, int addr);
    set4(8, w);
    exec(i_type(F7_TEXT, 1, 5'd8, 12'(addr)));
  endtask
  task automatic im_xor(int a, int b, int d);
    xr[1] = a; xr[2] = b; xr[3] = d;
    exec(r_type(F7_R0, 3'd4, 5'd1, 5'd2, 5'd3));
  endtask

  task automatic ext_write(int addr, word_t w);
    @(negedge clk); ext_req = 1; ext_we = 1; ext_addr = 16'(addr); ext_wdata = w;
    do @(posedge clk); while (!ext_ack);
    #1 ext_req = 0; ext_we = 0;
  endtask
  task automatic ext_read(int addr, output word_t w);
    @(negedge clk); ext_req = 1; ext_we = 0; ext_addr = 16'(addr);
    do @(posedge clk); while (!ext_ack);
    w = ext_rdata;
    #1 ext_req = 0;
  endtask

  localparam int KY = 17, WIN = 18;

  // Encrypt or decrypt the word at st (< 4096) in place; nk = 4, 6 or 8.
  task automatic aes_prog(int st, logic [255:0] key, int nk, bit dec);
    w128 rk [15];
    int nr;
    nr = nk + 6;
    expand_n(key, nk, rk);
    if (!dec) begin
      text_s(rk[0], KY);
      im_xor(st, KY, st);
      for (int r = 1; r <= nr; r++) begin
        exec(i_type(F7_SFTR, 0, 5'd0, 12'(st)));
        if (r < nr) exec(i_type(F7_SUBMX, 0, 5'd0, 12'(st)));
        else        exec(i_type(F7_SBOX, 0, 5'd0, 12'(st)));
        text_s(rk[r], KY);
        im_xor(st, KY, st);
      end
    end else begin
      text_s(rk[nr], KY);
      im_xor(st, KY, st);
      for (int r = nr - 1; r >= 1; r--) begin
        exec(i_type(F7_SFTR, 1, 5'd0, 12'(st)));
        set4(20, rk[r]);
        exec(i_type(F7_SUBMX, 1, 5'd20, 12'(st)));
      end
      exec(i_type(F7_SFTR, 1, 5'd0, 12'(st)));
      exec(i_type(F7_SBOX, 1, 5'd0, 12'(st)));
      text_s(rk[0], KY);
      im_xor(st, KY, st);
    end
  endtask

  // Exchange CEM words a and b with three in-memory XORs.
  task automatic xor_swap(int a, int b);
    im_xor(a, b, a);
    im_xor(a, b, b);
    im_xor(a, b, a);
  endtask

  // AES on the block at any CEM address.
  task automatic aes_any(int addr, logic [255:0] key, int nk, bit dec);
    if (addr < 4096) begin
      aes_prog(addr, key, nk, dec);
      n_inplace++;
    end else begin
      xor_swap(WIN, addr);
      aes_prog(WIN, key, nk, dec);
      xor_swap(WIN, addr);
      n_swapped++;
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NBLK = 100;
  int    addr_l [NBLK];
  word_t pt_l [NBLK];

  initial begin
    word_t w, pt;
    logic [255:0] key;
    int e0, d0, nk;
    for (int i = 0; i < 32; i++) xr[i] = 0;
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    wait (lut_ready);

    // the reference model itself against FIPS-197 Appendix C
    chk(aes_enc_n(128'h00112233445566778899aabbccddeeff,
                  {128'h000102030405060708090a0b0c0d0e0f, 128'h0}, 4)
        === 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "reference AES-128");
    chk(aes_enc_n(128'h00112233445566778899aabbccddeeff,
                  {192'h000102030405060708090a0b0c0d0e0f1011121314151617, 64'h0}, 6)
        === 128'hdda97ca4864cdfe06eaf70a0ec0d7191, "reference AES-192");
    chk(aes_enc_n(128'h00112233445566778899aabbccddeeff,
                  256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f, 8)
        === 128'h8ea2b7ca516745bfeafc49904b496089, "reference AES-256");

    // ---------------------------------------------- 1. ECB across the CEM
    key = {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h0};
    for (int k = 0; k < NBLK; k++) addr_l[k] = 64 + (k * 655) % 65472;
    addr_l[1] = 4095;
    addr_l[2] = 4096;
    addr_l[NBLK-1] = 65535;
    for (int k = 0; k < NBLK; k++) begin
      pt_l[k] = {$urandom, $urandom, $urandom, $urandom};
      ext_write(addr_l[k], pt_l[k]);
    end
    e0 = n_submx_e;
    for (int k = 0; k < NBLK; k++) aes_any(addr_l[k], key, 4, 0);
    chk(n_submx_e - e0 == 9 * NBLK, $sformatf("ECB: %0d SUBMX E steps", n_submx_e - e0));
    for (int k = 0; k < NBLK; k++) begin
      ext_read(addr_l[k], w);
      chk(w === aes_enc(pt_l[k], key[255:128]), $sformatf("ECB encrypt word %0d", addr_l[k]));
    end
    d0 = n_submx_d;
    for (int k = 0; k < NBLK; k++) aes_any(addr_l[k], key, 4, 1);
    chk(n_submx_d - d0 == 9 * NBLK, "ECB: SUBMX D steps");
    for (int k = 0; k < NBLK; k++) begin
      ext_read(addr_l[k], w);
      chk(w === pt_l[k], $sformatf("ECB decrypt word %0d", addr_l[k]));
    end
    chk(n_swapped > 0 && n_inplace > 0, "both swapped and in-place blocks");

    // ---------------------------------------------- 2. AES-192 / AES-256
    text_s(128'h00112233445566778899aabbccddeeff, 30);
    aes_any(30, {192'h000102030405060708090a0b0c0d0e0f1011121314151617, 64'h0}, 6, 0);
    ext_read(30, w);
    chk(w === 128'hdda97ca4864cdfe06eaf70a0ec0d7191, $sformatf("FIPS-197 C.2 %h", w));
    aes_any(30, {192'h000102030405060708090a0b0c0d0e0f1011121314151617, 64'h0}, 6, 1);
    ext_read(30, w);
    chk(w === 128'h00112233445566778899aabbccddeeff, "FIPS-197 C.2 decrypt");

    text_s(128'h00112233445566778899aabbccddeeff, 30);
    aes_any(30, 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f, 8, 0);
    ext_read(30, w);
    chk(w === 128'h8ea2b7ca516745bfeafc49904b496089, $sformatf("FIPS-197 C.3 %h", w));
    aes_any(30, 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f, 8, 1);
    ext_read(30, w);
    chk(w === 128'h00112233445566778899aabbccddeeff, "FIPS-197 C.3 decrypt");

    for (int n = 0; n < 8; n++) begin
      nk = (n % 2 == 0) ? 6 : 8;
      key = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      if (nk == 6) key[63:0] = '0;
      pt = {$urandom, $urandom, $urandom, $urandom};
      ext_write(40000 + n, pt);
      e0 = n_submx_e;
      d0 = n_submx_d;
      aes_any(40000 + n, key, nk, 0);
      ext_read(40000 + n, w);
      chk(w === aes_enc_n(pt, key, nk), $sformatf("AES-%0d encrypt %0d", 32 * nk, n));
      aes_any(40000 + n, key, nk, 1);
      ext_read(40000 + n, w);
      chk(w === pt, $sformatf("AES-%0d decrypt %0d", 32 * nk, n));
      chk(n_submx_e - e0 == nk + 5 && n_submx_d - d0 == nk + 5,
          $sformatf("AES-%0d used %0d rounds of SUBMX", 32 * nk, nk + 5));
    end

    $display("blocks swapped into the window %0d, in place %0d, SUBMX E %0d D %0d",
             n_swapped, n_inplace, n_submx_e, n_submx_d);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
