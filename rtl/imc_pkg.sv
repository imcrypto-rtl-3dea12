// imc_pkg: types, constants and GF(2^8) helpers shared by the IMCRYPTO fabric.
//
// State layout: a 128-bit AES block is held as one memory word, byte 0 in
// bits [127:120] (FIPS-197 input order). State byte a(r,c) is byte 4*c+r, so a
// state column c occupies bytes 4c..4c+3. The same word is exchanged with the
// controller as four 32-bit registers, register 0 holding bits [127:96].
//
// Instruction encodings follow the paper's instruction table and format
// figure: custom I-type opcode 0000111, custom R-type opcode 1000111;
// I-type = add[11:0] | rs1 | funct7 | 1 bit | opcode,
// R-type = func7 | s1 | s2 | funct3 | sd | opcode (s1 in bits 24:20 and s2 in
// bits 19:15 as the format figure prints them).
//
// The S-box is computed (multiplicative inverse as x^254, then the affine
// transform) rather than stored, so that no table file is needed; it is used
// only by the sequencer that programs the LUT arrays after reset.
package imc_pkg;

  typedef logic [7:0]   byte_t;
  typedef logic [127:0] word_t;

  // 1 MB of compute-enabled memory in 128-bit words.
  localparam int unsigned CEM_WORDS_DEFAULT = 65536;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_IMC_I = 7'b0000111;
  localparam logic [6:0] OPC_IMC_R = 7'b1000111;

  localparam logic [6:0] F7_TEXT  = 7'b0000000;
  localparam logic [6:0] F7_SFTR  = 7'b0000100;
  localparam logic [6:0] F7_SUBMX = 7'b0001000;
  localparam logic [6:0] F7_SBOX  = 7'b0010000;

  localparam logic [6:0] F7_R0 = 7'b0000000;
  localparam logic [6:0] F7_R1 = 7'b1000000;

  // ------------------------------------------------------------- CEM ops
  typedef enum logic [3:0] {
    CEM_READ  = 4'd0,
    CEM_WRITE = 4'd1,
    CEM_MOVE  = 4'd2,
    CEM_ADD   = 4'd3,
    CEM_AND   = 4'd4,
    CEM_OR    = 4'd5,
    CEM_XOR   = 4'd6,
    CEM_NOT   = 4'd7,
    CEM_CSR   = 4'd8,
    CEM_SR    = 4'd9,
    CEM_CSL   = 4'd10,
    CEM_SL    = 4'd11
  } cem_op_e;

  // One command to the compute-enabled memory.
  typedef struct packed {
    cem_op_e     op;
    logic [31:0] addr_a;   // first source (READ, MOVE, binary ops, NOT)
    logic [31:0] addr_b;   // second source (binary ops, shifted operand)
    logic [31:0] addr_d;   // destination (WRITE and every computing op)
    logic [4:0]  shamt;    // shift / rotate amount
    word_t       wdata;    // data for WRITE
  } cem_cmd_t;

  // --------------------------------------------------------- LUT modes
  typedef enum logic [1:0] {
    LUT_SUBMX_E = 2'd0,   // SubBytes + MixColumns
    LUT_SUBMX_D = 2'd1,   // InvSubBytes + AddRoundKey + InvMixColumns
    LUT_SBOX_E  = 2'd2,   // SubBytes only (last encryption round)
    LUT_SBOX_D  = 2'd3    // InvSubBytes only (last decryption round)
  } lut_mode_e;

  // ------------------------------------------------------------ helpers
  function automatic byte_t get_byte(word_t w, int unsigned idx);
    return w[127 - 8*idx -: 8];
  endfunction

  function automatic byte_t xtime(byte_t a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  // GF(2^8) product modulo x^8+x^4+x^3+x+1.
  function automatic byte_t gmul(byte_t a, byte_t b);
    byte_t p = '0;
    byte_t x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic byte_t ginv(byte_t a);
    // a^254 = a^-1 (and 0 -> 0)
    byte_t r = 8'h01;
    byte_t s = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gmul(r, s);
      s = gmul(s, s);
    end
    return r;
  endfunction

  function automatic byte_t sbox(byte_t a);
    byte_t b = ginv(a);
    return b ^ {b[6:0], b[7]} ^ {b[5:0], b[7:6]} ^ {b[4:0], b[7:5]}
             ^ {b[3:0], b[7:4]} ^ 8'h63;
  endfunction

endpackage
