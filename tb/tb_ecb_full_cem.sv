// tb_ecb_full_cem: AES-128 ECB with every CEM word holding data.
//
// This is the evaluated workload pattern, where the plaintext fills the
// whole memory. It runs on a fabric whose CEM is scaled to 8,192 words
// (128 KB), so that the run takes seconds. The default 65,536 words would
// take about eight times as long with the same program. Nothing in the CEM
// is spare, so the program uses two tricks:
// - Key word. AddRoundKey (IMXOR) needs the round key in a CEM word. The
//   block stored in word KY is parked in core registers (IMTEXT L), and KY
//   serves as the key word for every other block. Finally a finished
//   ciphertext word is parked instead, the KY block is put back (IMTEXT S)
//   and encrypted, and the parked ciphertext is restored.
// - Window. Step instructions reach only words 0..4095. Every block above
//   that is exchanged with the working word WIN by three IMXORs, which needs
//   no free word. It is processed there and exchanged back.
// All 8,192 ciphertexts are read through the cache-side port and compared
// with the reference. Then everything is decrypted the same way and
// compared with the plaintexts. The testbench counts the in-place blocks,
// the swapped blocks and the IMSUBMX steps from the design's signals.
module tb_ecb_full_cem;
  import tb_ref_pkg::*;
  import imc_pkg::*;

  localparam int WORDS = 8192;
  localparam int AW = $clog2(WORDS);

  logic clk = 0, rst_n = 1;
  logic instr_valid = 0, instr_ready, instr_done, instr_illegal;
  logic [31:0] instr = 0;
  logic [4:0] rf_raddr [4];
  logic [31:0] rf_rdata [4];
  logic rf_we;
  logic [4:0] rf_waddr;
  word_t rf_wdata;
  logic ext_req = 0, ext_we = 0, ext_ack;
  logic [AW-1:0] ext_addr = 0;
  word_t ext_wdata = '0, ext_rdata;
  logic lut_ready;
  int checks = 0, failures = 0;

  imcrypto_top #(.CEM_WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] xr [32];
  always_comb for (int i = 0; i < 4; i++) rf_rdata[i] = xr[rf_raddr[i]];
  always @(posedge clk)
    if (rf_we) for (int i = 0; i < 4; i++) xr[5'(rf_waddr + 5'(i))] <= rf_wdata[127 - 32*i -: 32];

  int n_submx_e = 0, n_submx_d = 0;
  always @(posedge clk) if (rst_n && dut.u_lut.en && dut.u_lut.ready) begin
    if (dut.u_lut.mode == LUT_SUBMX_E) n_submx_e++;
    if (dut.u_lut.mode == LUT_SUBMX_D) n_submx_d++;
  end
  int n_swapped = 0, n_inplace = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
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
  task automatic im_xor(int a, int b, int d);
    xr[1] = a; xr[2] = b; xr[3] = d;
    exec(r_type(F7_R0, 3'd4, 5'd1, 5'd2, 5'd3));
  endtask

  task automatic ext_write(int addr, word_t w);
    @(negedge clk); ext_req = 1; ext_we = 1; ext_addr = AW'(addr); ext_wdata = w;
    do @(posedge clk); while (!ext_ack);
    #1 ext_req = 0; ext_we = 0;
  endtask
  task automatic ext_read(int addr, output word_t w);
    @(negedge clk); ext_req = 1; ext_we = 0; ext_addr = AW'(addr);
    do @(posedge clk); while (!ext_ack);
    w = ext_rdata;
    #1 ext_req = 0;
  endtask

  w128 rk [11];
  int ky;                    // current key word
  localparam int KY = 1, ALT = 2, WIN = 100;

  // AES-128 of the word at st (< 4096) in place, round keys through word ky
  task automatic aes_prog(int st, bit dec);
    if (!dec) begin
      set4(8, rk[0]); exec(i_type(F7_TEXT, 1, 5'd8, 12'(ky)));
      im_xor(st, ky, st);
      for (int r = 1; r <= 10; r++) begin
        exec(i_type(F7_SFTR, 0, 5'd0, 12'(st)));
        if (r < 10) exec(i_type(F7_SUBMX, 0, 5'd0, 12'(st)));
        else        exec(i_type(F7_SBOX, 0, 5'd0, 12'(st)));
        set4(8, rk[r]); exec(i_type(F7_TEXT, 1, 5'd8, 12'(ky)));
        im_xor(st, ky, st);
      end
    end else begin
      set4(8, rk[10]); exec(i_type(F7_TEXT, 1, 5'd8, 12'(ky)));
      im_xor(st, ky, st);
      for (int r = 9; r >= 1; r--) begin
        exec(i_type(F7_SFTR, 1, 5'd0, 12'(st)));
        set4(20, rk[r]);
        exec(i_type(F7_SUBMX, 1, 5'd20, 12'(st)));
      end
      exec(i_type(F7_SFTR, 1, 5'd0, 12'(st)));
      exec(i_type(F7_SBOX, 1, 5'd0, 12'(st)));
      set4(8, rk[0]); exec(i_type(F7_TEXT, 1, 5'd8, 12'(ky)));
      im_xor(st, ky, st);
    end
  endtask

  task automatic aes_any(int addr, bit dec);
    if (addr < 4096) begin
      aes_prog(addr, dec);
      n_inplace++;
    end else begin
      im_xor(WIN, addr, WIN); im_xor(WIN, addr, addr); im_xor(WIN, addr, WIN);
      aes_prog(WIN, dec);
      im_xor(WIN, addr, WIN); im_xor(WIN, addr, addr); im_xor(WIN, addr, WIN);
      n_swapped++;
    end
  endtask

  // Whole memory, with the key word borrowed as described above.
  task automatic pass_all(bit dec);
    ky = KY;
    exec(i_type(F7_TEXT, 0, 5'd24, 12'(KY)));         // park block KY in x24..x27
    for (int a = 0; a < WORDS; a++) if (a != KY) aes_any(a, dec);
    exec(i_type(F7_TEXT, 0, 5'd28, 12'(ALT)));        // park finished block ALT
    exec(i_type(F7_TEXT, 1, 5'd24, 12'(KY)));         // put block KY back
    ky = ALT;
    aes_any(KY, dec);
    exec(i_type(F7_TEXT, 1, 5'd28, 12'(ALT)));        // restore block ALT
  endtask

  function automatic w128 enc_rk(w128 pt);
    w128 s;
    s = pt ^ rk[0];
    for (int r = 1; r < 10; r++) s = mc(sb(sr(s, 0), 0), 0) ^ rk[r];
    return sb(sr(s, 0), 0) ^ rk[10];
  endfunction

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t pt_l [WORDS];

  initial begin
    word_t w;
    int bad;
    for (int i = 0; i < 32; i++) xr[i] = 0;
    expand(128'h000102030405060708090a0b0c0d0e0f, rk);
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    for (int a = 0; a < WORDS; a++) begin
      pt_l[a] = {$urandom, $urandom, $urandom, $urandom};
      ext_write(a, pt_l[a]);
    end
    pt_l[0] = 128'h00112233445566778899aabbccddeeff;   // FIPS-197 C.1 block
    ext_write(0, pt_l[0]);
    wait (lut_ready);

    pass_all(0);
    chk(n_submx_e == 9 * WORDS, $sformatf("%0d SUBMX E steps", n_submx_e));
    bad = 0;
    for (int a = 0; a < WORDS; a++) begin
      ext_read(a, w);
      if (w !== enc_rk(pt_l[a])) bad++;
      chk(w === enc_rk(pt_l[a]), $sformatf("ciphertext word %0d", a));
      if (a == 0) chk(w === 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "FIPS-197 C.1 at word 0");
    end
    $display("encryption: %0d of %0d words wrong", bad, WORDS);

    pass_all(1);
    chk(n_submx_d == 9 * WORDS, $sformatf("%0d SUBMX D steps", n_submx_d));
    bad = 0;
    for (int a = 0; a < WORDS; a++) begin
      ext_read(a, w);
      if (w !== pt_l[a]) bad++;
      chk(w === pt_l[a], $sformatf("plaintext word %0d", a));
    end
    $display("decryption: %0d of %0d words wrong", bad, WORDS);
    chk(n_swapped == WORDS && n_inplace == WORDS, "swapped and in-place block counts");

    $display("blocks in place %0d, swapped %0d, SUBMX E %0d D %0d",
             n_inplace, n_swapped, n_submx_e, n_submx_d);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
