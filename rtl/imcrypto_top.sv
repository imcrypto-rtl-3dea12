// imcrypto_top: the IMCRYPTO fabric.
//
// Four blocks: (1) the compute-enabled memory (cem), which stores the data and
// does AddRoundKey and the other in-memory operations; (2) the bi-directional
// shifter for (Inv)ShiftRows; (3) the LUT fabric, four modules of RAM and
// RA/CAM arrays doing combined (Inv)SubBytes+(Inv)MixColumns; (4) the
// custom-instruction unit of the RISC-V based controller, which decodes the
// custom instructions and sequences a block operation: read the state word
// from the CEM, pass it through the shifter or the LUT fabric, write it back.
//
// The RISC-V core itself is outside: it offers custom instructions on
// instr_valid/instr, waits for instr_done, and serves the register-file
// ports (combinational read of four registers, write of four consecutive
// registers for TEXT L). Round keys are produced by the core's software. The
// cache side (L2 / bus) reaches the CEM through the ext_* word port, which is
// served whenever the controller is not using the memory.
//
// The block structure follows the paper; the port protocol is this design's.
//
// Lint reports rst_n as used both asynchronously and synchronously: the
// flip-flops reset asynchronously, and the same signal disables the
// assertions of the sub-blocks during reset (disable iff), which is intended.
module imcrypto_top
  import imc_pkg::*;
#(
  parameter int unsigned CEM_WORDS = CEM_WORDS_DEFAULT,
  localparam int unsigned AW = $clog2(CEM_WORDS)
) (
  input  logic        clk,
  input  logic        rst_n,
  // custom instructions from the RISC-V core
  input  logic        instr_valid,
  input  logic [31:0] instr,
  output logic        instr_ready,
  output logic        instr_done,
  output logic        instr_illegal,
  // RISC-V register file
  output logic [4:0]  rf_raddr [4],
  input  logic [31:0] rf_rdata [4],
  output logic        rf_we,
  output logic [4:0]  rf_waddr,
  output word_t       rf_wdata,
  // cache-side word port of the CEM
  input  logic        ext_req,
  input  logic        ext_we,
  input  logic [AW-1:0] ext_addr,
  input  word_t       ext_wdata,
  output logic        ext_ack,
  output word_t       ext_rdata,
  // status
  output logic        lut_ready
);

  logic      cem_valid, cem_ready, cem_done;
  cem_cmd_t  cem_cmd;
  word_t     cem_rdata;
  logic      sh_en, sh_dir, sh_done;
  word_t     sh_din, sh_dout;
  logic      lut_en, lut_done;
  lut_mode_e lut_mode;
  word_t     lut_din, lut_rk, lut_dout;

  imc_ctrl u_ctrl (
    .clk, .rst_n,
    .instr_valid, .instr, .instr_ready, .instr_done, .instr_illegal,
    .rf_raddr, .rf_rdata, .rf_we, .rf_waddr, .rf_wdata,
    .cem_valid, .cem_ready, .cem_cmd, .cem_done, .cem_rdata,
    .sh_en, .sh_dir, .sh_din, .sh_done, .sh_dout,
    .lut_ready, .lut_en, .lut_mode, .lut_din, .lut_rk, .lut_done, .lut_dout
  );

  cem #(.WORDS(CEM_WORDS)) u_cem (
    .clk, .rst_n,
    .cmd_valid (cem_valid), .cmd_ready (cem_ready), .cmd (cem_cmd),
    .cmd_done (cem_done), .rdata (cem_rdata),
    .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_ack, .ext_rdata
  );

  bidir_shifter u_shift (
    .clk, .rst_n, .en (sh_en), .dir (sh_dir), .din (sh_din),
    .done (sh_done), .dout (sh_dout)
  );

  lut_fabric u_lut (
    .clk, .rst_n, .ready (lut_ready), .en (lut_en), .mode (lut_mode),
    .state_in (lut_din), .rk (lut_rk), .done (lut_done), .state_out (lut_dout)
  );

endmodule
