// tb_imcrypto_top: end-to-end test of the whole fabric at its default size
// (1 MB CEM). The testbench plays the host RISC-V core: it holds the
// register file, computes the AES-128 round keys in software and issues the
// custom instructions one at a time, waiting for instr_done. It also plays
// the cache side on the CEM's external port.
//
// Programs run:
//   - AES-128 ECB encryption and decryption of the FIPS-197 Appendix C.1
//     block and of random blocks (TEXT, IMXOR, SFTR, SUBMX, SBOX);
//   - CTR mode over three blocks, counter kept in the CEM and stepped with
//     IMADD, keystream XORed with IMXOR;
//   - CBC encryption over three blocks, chaining with IMXOR and IMMOVE;
//   - SHA-256 of "abc" with the R-type instructions (message schedule and 64
//     compression rounds), message and constants loaded through the external
//     port, checked against the published digest.
// Mechanisms counted from the design's own signals, each must occur: every
// LUT mode, both shifter directions, every CEM operation, external reads and
// writes, an external request kept waiting by a command, a LUT request
// stalled before the tables are programmed, and an illegal instruction.
module tb_imcrypto_top;
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

  // ------------------------------------------------ register file of the core
  logic [31:0] xr [32];
  always_comb for (int i = 0; i < 4; i++) rf_rdata[i] = xr[rf_raddr[i]];
  always @(posedge clk)
    if (rf_we) for (int i = 0; i < 4; i++) xr[5'(rf_waddr + 5'(i))] <= rf_wdata[127 - 32*i -: 32];

  // ------------------------------------------------ mechanism counters
  int n_lut [4];
  int n_sh [2];
  int n_op [12];
  int n_ext_wr = 0, n_ext_rd = 0, n_ext_wait = 0, n_stall = 0, n_illegal = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_lut.en && dut.u_lut.ready) n_lut[dut.u_lut.mode]++;
    if (dut.u_shift.en) n_sh[dut.u_shift.dir]++;
    if (dut.u_cem.take_cmd) n_op[dut.u_cem.cmd.op]++;
    if (ext_ack) begin if (ext_we) n_ext_wr++; else n_ext_rd++; end
    if (ext_req && !dut.u_cem.cmd_ready) n_ext_wait++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_BLK && !lut_ready) n_stall++;
    if (instr_done && instr_illegal) n_illegal++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------ core-side helpers
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
  function automatic word_t get4(int base);
    return {xr[base], xr[base+1], xr[base+2], xr[base+3]};
  endfunction

  task automatic text_s(word_t w, int addr);   // via registers x8..x11
    set4(8, w);
    exec(i_type(F7_TEXT, 1, 5'd8, 12'(addr)));
  endtask
  task automatic text_l(int addr, output word_t w);   // into x16..x19
    exec(i_type(F7_TEXT, 0, 5'd16, 12'(addr)));
    @(negedge clk);
    w = get4(16);
  endtask
  // R-type with register operands x1, x2, x3 holding addresses
  task automatic rop(logic [6:0] f7, logic [2:0] f3, int a, int b, int d);
    xr[1] = a; xr[2] = b; xr[3] = d;
    exec(r_type(f7, f3, 5'd1, 5'd2, 5'd3));
  endtask
  task automatic rsh(logic [6:0] f7, logic [2:0] f3, int amt, int b, int d);
    xr[2] = b; xr[3] = d;
    exec(r_type(f7, f3, 5'(amt), 5'd2, 5'd3));
  endtask
  task automatic im_xor(int a, int b, int d);  rop(F7_R0, 3'd4, a, b, d); endtask
  task automatic im_add(int a, int b, int d);  rop(F7_R0, 3'd1, a, b, d); endtask
  task automatic im_and(int a, int b, int d);  rop(F7_R0, 3'd2, a, b, d); endtask
  task automatic im_or(int a, int b, int d);   rop(F7_R0, 3'd3, a, b, d); endtask
  task automatic im_not(int a, int d);         rop(F7_R0, 3'd5, a, 0, d); endtask
  task automatic im_move(int a, int d);        rop(F7_R0, 3'd0, a, 0, d); endtask
  task automatic im_csr(int n, int b, int d);  rsh(F7_R0, 3'd6, n, b, d); endtask
  task automatic im_sr(int n, int b, int d);   rsh(F7_R0, 3'd7, n, b, d); endtask
  task automatic im_csl(int n, int b, int d);  rsh(F7_R1, 3'd0, n, b, d); endtask
  task automatic im_sl(int n, int b, int d);   rsh(F7_R1, 3'd1, n, b, d); endtask

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

  // ------------------------------------------------ AES-128 programs
  localparam int ST = 16, KY = 17, TMP = 18;

  // encrypt the word at ST in place
  task automatic aes_enc_prog(word_t key);
    w128 rk [11];
    expand(key, rk);
    text_s(rk[0], KY);
    im_xor(ST, KY, ST);
    for (int r = 1; r <= 10; r++) begin
      exec(i_type(F7_SFTR, 0, 5'd0, 12'(ST)));
      if (r < 10) exec(i_type(F7_SUBMX, 0, 5'd0, 12'(ST)));
      else        exec(i_type(F7_SBOX, 0, 5'd0, 12'(ST)));
      text_s(rk[r], KY);
      im_xor(ST, KY, ST);
    end
  endtask

  task automatic aes_dec_prog(word_t key);
    w128 rk [11];
    expand(key, rk);
    text_s(rk[10], KY);
    im_xor(ST, KY, ST);
    for (int r = 9; r >= 1; r--) begin
      exec(i_type(F7_SFTR, 1, 5'd0, 12'(ST)));
      set4(20, rk[r]);                       // round key in x20..x23
      exec(i_type(F7_SUBMX, 1, 5'd20, 12'(ST)));
    end
    exec(i_type(F7_SFTR, 1, 5'd0, 12'(ST)));
    exec(i_type(F7_SBOX, 1, 5'd0, 12'(ST)));
    text_s(rk[0], KY);
    im_xor(ST, KY, ST);
  endtask

  // ------------------------------------------------ SHA-256 program
  localparam int W0 = 1000, K0 = 1100, HV = 1200, H0 = 1210, T0 = 1300;
  localparam int TS0 = T0 + 7, TS1 = T0 + 8, TCH = T0 + 9, TMJ = T0 + 10,
                 TP1 = T0 + 11, TP2 = T0 + 12;
  localparam logic [31:0] KC [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
  localparam logic [31:0] HI [8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                     32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  task automatic sha256_abc();
    word_t w;
    int a = HV, b = HV + 1, c = HV + 2, d = HV + 3, e = HV + 4, f = HV + 5, g = HV + 6, h = HV + 7;
    int t0 = T0, t1 = T0 + 1, t2 = T0 + 2, t3 = T0 + 3, t5 = T0 + 5, t6 = T0 + 6;
    logic [31:0] exp_d [8] = '{32'hba7816bf, 32'h8f01cfea, 32'h414140de, 32'h5dae2223,
                               32'hb00361a3, 32'h96177a9c, 32'hb410ff61, 32'hf20015ad};
    // padded one-block message "abc", one 32-bit word per CEM word (lane 0)
    for (int i = 0; i < 16; i++) begin
      logic [31:0] m;
      m = (i == 0) ? 32'h61626380 : (i == 15) ? 32'h00000018 : 32'h0;
      ext_write(W0 + i, {96'h0, m});
    end
    for (int i = 0; i < 64; i++) ext_write(K0 + i, {96'h0, KC[i]});
    for (int i = 0; i < 8; i++) begin
      ext_write(H0 + i, {96'h0, HI[i]});
      ext_write(HV + i, {96'h0, HI[i]});
    end
    // message schedule
    for (int i = 16; i < 64; i++) begin
      im_csr(17, W0 + i - 2, t0);
      im_csr(19, W0 + i - 2, t1);
      im_sr(10, W0 + i - 2, t2);
      im_xor(t0, t1, t3);
      im_xor(t3, t2, TS1);
      im_add(TS1, W0 + i - 7, t5);
      im_csr(7, W0 + i - 15, t0);
      im_csr(18, W0 + i - 15, t1);
      im_sr(3, W0 + i - 15, t2);
      im_xor(t0, t1, t3);
      im_xor(t3, t2, TS0);
      im_add(TS0, t5, t6);
      im_add(t6, W0 + i - 16, W0 + i);
    end
    // compression
    for (int i = 0; i < 64; i++) begin
      im_csr(6, e, t0);  im_csr(11, e, t1); im_csr(25, e, t2);
      im_xor(t0, t1, t3); im_xor(t3, t2, TS1);
      im_and(e, f, t0); im_not(e, t1); im_and(t1, g, t2); im_xor(t2, t0, TCH);
      im_and(a, b, t0); im_and(a, c, t1); im_and(b, c, t2);
      im_xor(t0, t1, t3); im_xor(t3, t2, TMJ);
      im_csr(2, a, t0); im_csr(13, a, t1); im_csr(22, a, t2);
      im_xor(t1, t0, t3); im_xor(t2, t3, TS0);
      im_add(TS0, TMJ, TP2);
      im_add(h, TS1, t0); im_add(t0, TCH, t1); im_add(t1, K0 + i, t2); im_add(t2, W0 + i, TP1);
      im_move(g, h); im_move(f, g); im_move(e, f); im_add(d, TP1, e);
      im_move(c, d); im_move(b, c); im_move(a, b); im_add(TP1, TP2, a);
    end
    for (int i = 0; i < 8; i++) im_add(HV + i, H0 + i, HV + i);
    for (int i = 0; i < 8; i++) begin
      ext_read(HV + i, w);
      chk(w[31:0] === exp_d[i], $sformatf("SHA-256 word %0d: %h != %h", i, w[31:0], exp_d[i]));
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t w, key, pt, ct, ctr, prev, p;
    for (int i = 0; i < 32; i++) xr[i] = 0;
    for (int i = 0; i < 4; i++) n_lut[i] = 0;
    for (int i = 0; i < 2; i++) n_sh[i] = 0;
    for (int i = 0; i < 12; i++) n_op[i] = 0;
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    // A LUT step issued right after reset waits for the tables.
    text_s(128'h00112233445566778899aabbccddeeff, TMP);
    exec(i_type(F7_SBOX, 0, 5'd0, 12'(TMP)));
    text_l(TMP, w);
    chk(w === sb(128'h00112233445566778899aabbccddeeff, 0), "SubBytes after stall");

    // illegal instruction
    exec(i_type(7'b0111111, 0, 5'd0, 12'd0));
    chk(instr_illegal === 1'b1, "illegal flagged");

    // FIPS-197 C.1
    key = 128'h000102030405060708090a0b0c0d0e0f;
    text_s(128'h00112233445566778899aabbccddeeff, ST);
    aes_enc_prog(key);
    text_l(ST, ct);
    chk(ct === 128'h69c4e0d86a7b0430d8cdb78070b4c55a, $sformatf("FIPS-197 encrypt %h", ct));
    aes_dec_prog(key);
    text_l(ST, pt);
    chk(pt === 128'h00112233445566778899aabbccddeeff, $sformatf("FIPS-197 decrypt %h", pt));

    // random blocks; plaintext in and ciphertext out through the cache-side port,
    // with the external request raised while an instruction runs
    for (int n = 0; n < 4; n++) begin
      key = {$urandom, $urandom, $urandom, $urandom};
      pt  = {$urandom, $urandom, $urandom, $urandom};
      ext_write(ST, pt);
      aes_enc_prog(key);
      fork
        exec(i_type(F7_SFTR, 0, 5'd0, 12'(TMP)));
        begin @(negedge clk); @(negedge clk); ext_read(ST, ct); end
      join
      chk(ct === aes_enc(pt, key), $sformatf("encrypt %0d", n));
      aes_dec_prog(key);
      ext_read(ST, w);
      chk(w === pt, $sformatf("decrypt %0d", n));
    end

    // CTR mode: counter at 30, increment word at 31
    key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    ctr = 128'hf0f1f2f3f4f5f6f7f8f9fafbfcfdfeff;
    text_s(ctr, 30);
    text_s(128'h1, 31);
    for (int n = 0; n < 3; n++) begin
      p = {$urandom, $urandom, $urandom, $urandom};
      im_move(30, ST);
      aes_enc_prog(key);
      text_s(p, 32);
      im_xor(ST, 32, 33);
      text_l(33, w);
      chk(w === (aes_enc(ctr, key) ^ p), $sformatf("CTR block %0d", n));
      im_add(30, 31, 30);
      ctr[31:0] = ctr[31:0] + 1;
    end
    text_l(30, w);
    chk(w === ctr, "CTR counter");

    // CBC encryption: IV at 34
    prev = {$urandom, $urandom, $urandom, $urandom};
    text_s(prev, 34);
    for (int n = 0; n < 3; n++) begin
      p = {$urandom, $urandom, $urandom, $urandom};
      text_s(p, ST);
      im_xor(ST, 34, ST);
      aes_enc_prog(key);
      im_move(ST, 34);
      text_l(34, w);
      prev = aes_enc(p ^ prev, key);
      chk(w === prev, $sformatf("CBC block %0d", n));
    end

    // remaining general-purpose operations
    text_s(128'h80000001_0000ffff_12345678_deadbeef, 40);
    text_s(128'hffffffff_0f0f0f0f_00000001_01234567, 41);
    im_or(40, 41, 42);  text_l(42, w);
    chk(w === (128'h80000001_0000ffff_12345678_deadbeef | 128'hffffffff_0f0f0f0f_00000001_01234567), "IMOR");
    im_csl(4, 40, 42);  text_l(42, w);
    chk(w === 128'h00000018_000ffff0_23456781_eadbeefd, "IMCSL");
    im_sl(4, 40, 42);   text_l(42, w);
    chk(w === 128'h00000010_000ffff0_23456780_eadbeef0, "IMSL");

    sha256_abc();

    // every mechanism must have happened
    for (int i = 0; i < 4; i++) chk(n_lut[i] > 0, $sformatf("LUT mode %0d used", i));
    for (int i = 0; i < 2; i++) chk(n_sh[i] > 0, $sformatf("shifter dir %0d used", i));
    for (int i = 0; i < 12; i++) chk(n_op[i] > 0, $sformatf("CEM op %0d used", i));
    chk(n_ext_wr > 0 && n_ext_rd > 0, "external port used");
    chk(n_ext_wait > 0, "external request waited");
    chk(n_stall > 0, "LUT stall");
    chk(n_illegal > 0, "illegal instruction");
    $display("mechanisms: lut %0d/%0d/%0d/%0d shift %0d/%0d ext wr %0d rd %0d wait %0d stall %0d illegal %0d",
             n_lut[0], n_lut[1], n_lut[2], n_lut[3], n_sh[0], n_sh[1], n_ext_wr, n_ext_rd,
             n_ext_wait, n_stall, n_illegal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
