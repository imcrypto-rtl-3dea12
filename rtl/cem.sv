// cem: the compute-enabled memory (CEM), 1 MB of SRAM that computes.
//
// The CEM holds plaintexts, ciphertexts, round keys and scratch words as
// 128-bit words (WORDS = 65536 words = 1 MB). Besides plain reads and writes
// it executes the in-memory operations of the custom R-type instructions
// between two stored words and writes the result to a third word, without the
// data leaving the memory. In silicon this is done by activating two word
// lines at once and combining the bit lines in customized sense amplifiers;
// here the two sources are two read ports of the array and the combining
// logic is a small ALU behind them.
//
// Operations (cem_op_e): READ (rdata = M[a]), WRITE (M[d] = wdata), MOVE
// (M[d] = M[a]), AND/OR/XOR (M[d] = M[a] op M[b]), NOT (M[d] = ~M[a]), ADD,
// CSR/SR (rotate/shift M[b] right by shamt), CSL/SL (left). ADD and the
// shifts work on four independent 32-bit lanes, the word size of the RISC-V
// controller and of SHA-256; AND/OR/XOR/NOT are bitwise over the 128 bits.
// XOR of a state word and a round-key word is the AddRoundKey step.
//
// Interface/timing: a command is taken when cmd_valid and cmd_ready are high
// (sources are read at that edge); in the next cycle the result is written,
// cmd_done pulses and rdata shows M[a] (READ) or the computed word. So every
// command takes 2 cycles and cmd_ready is low in the second. The external
// port (the cache side) gets the memory when no command is offered: ext_req
// is taken in the same way and ext_ack pulses one cycle later, with ext_rdata
// for a read. Commands have priority over the external port.
//
// The 1 MB size and the set of operations are the paper's. The 128-bit word,
// the 32-bit lanes of ADD and the shifts, the 2-cycle timing and the port
// arbitration are this design's choices (the paper gives none of them).
module cem
  import imc_pkg::*;
#(
  parameter int unsigned WORDS = CEM_WORDS_DEFAULT,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic     clk,
  input  logic     rst_n,
  // command port (controller)
  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  cem_cmd_t cmd,
  output logic     cmd_done,
  output word_t    rdata,
  // external port (cache hierarchy side)
  input  logic     ext_req,
  input  logic     ext_we,
  input  logic [AW-1:0] ext_addr,
  input  word_t    ext_wdata,
  output logic     ext_ack,
  output word_t    ext_rdata
);

  word_t mem [WORDS];

  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_EXT} state_e;
  state_e   state;
  cem_op_e  op_q;
  logic [AW-1:0] ad_q;
  logic [4:0] sh_q;
  word_t    wd_q;
  word_t    ra, rb;        // sense-amplifier outputs of the two sources

  assign cmd_ready = (state == S_IDLE);

  logic take_cmd, take_ext;
  assign take_cmd = (state == S_IDLE) && cmd_valid;
  assign take_ext = (state == S_IDLE) && !cmd_valid && ext_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else if (take_cmd) state <= S_EXEC;
    else if (take_ext) state <= S_EXT;
    else state <= S_IDLE;
  end

  // Sources are sensed at the accepting edge.
  always_ff @(posedge clk) begin
    if (take_cmd) begin
      ra   <= mem[cmd.addr_a[AW-1:0]];
      rb   <= mem[cmd.addr_b[AW-1:0]];
      op_q <= cmd.op;
      ad_q <= cmd.addr_d[AW-1:0];
      sh_q <= cmd.shamt;
      wd_q <= cmd.wdata;
    end else if (take_ext) begin
      ra   <= mem[ext_addr];
    end
  end

  // ------------------------------------------------------ compute logic
  function automatic logic [31:0] rotr32(logic [31:0] x, logic [4:0] s);
    return (x >> s) | (x << (6'd32 - 6'(s)));
  endfunction
  function automatic logic [31:0] rotl32(logic [31:0] x, logic [4:0] s);
    return (x << s) | (x >> (6'd32 - 6'(s)));
  endfunction

  word_t res;
  logic [31:0] xa, xb, y;
  always_comb begin
    res = ra;
    xa  = '0;
    xb  = '0;
    y   = '0;
    unique case (op_q)
      CEM_READ, CEM_MOVE: res = ra;
      CEM_WRITE:          res = wd_q;
      CEM_AND:            res = ra & rb;
      CEM_OR:             res = ra | rb;
      CEM_XOR:            res = ra ^ rb;
      CEM_NOT:            res = ~ra;
      default: begin
        for (int l = 0; l < 4; l++) begin
          xa = ra[32*l +: 32];
          xb = rb[32*l +: 32];
          unique case (op_q)
            CEM_ADD: y = xa + xb;
            CEM_CSR: y = rotr32(xb, sh_q);
            CEM_SR:  y = xb >> sh_q;
            CEM_CSL: y = rotl32(xb, sh_q);
            default: y = xb << sh_q;   // CEM_SL
          endcase
          res[32*l +: 32] = y;
        end
      end
    endcase
  end

  logic writes;
  assign writes = (state == S_EXEC) && (op_q != CEM_READ);

  always_ff @(posedge clk) begin
    if (writes) mem[ad_q] <= res;
    else if (take_ext && ext_we) mem[ext_addr] <= ext_wdata;
  end

  assign cmd_done  = (state == S_EXEC);
  assign rdata     = res;
  assign ext_ack   = (state == S_EXT);
  assign ext_rdata = ra;

endmodule
