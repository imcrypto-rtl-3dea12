// imc_ctrl: custom-instruction unit of the RISC-V based controller.
//
// The host RISC-V core hands over every instruction with the custom opcodes
// (I-type 0000111, R-type 1000111). This unit decodes it, reads the register
// operands it needs from the core's register file, drives the three main
// inputs of the fabric blocks (an enable, a memory address and a 128-bit data
// word made of four 32-bit registers), waits for the block to finish and
// answers with instr_done (the DONE signal), after which the core fetches its
// next instruction.
//
// I-type (add[11:0] | rs1 | funct7 | b | opcode), add = CEM word address,
// rs1 = first of four consecutive registers x[rs1..rs1+3] (x[rs1] = bits
// [127:96] of the word):
//   TEXT  L (b=0)  CEM word add -> x[rs1..rs1+3]           (load)
//   TEXT  S (b=1)  x[rs1..rs1+3] -> CEM word add           (store)
//   SFTR  E/D      CEM[add] = (Inv)ShiftRows(CEM[add])
//   SUBMX E/D      CEM[add] = SubBytes+MixColumns(CEM[add])            (E)
//                  CEM[add] = InvMixColumns(InvSubBytes(CEM[add]) ^ rk) (D),
//                  rk = x[rs1..rs1+3], the round key given by the core
//   SBOX  E/D      CEM[add] = (Inv)SubBytes(CEM[add])
// R-type (func7 | s1 | s2 | funct3 | sd | opcode): x[s1], x[s2], x[sd] hold CEM
// word addresses; IMMOVE, IMADD, IMAND, IMOR, IMXOR, IMNOT act on
// CEM[x[s1]], CEM[x[s2]] and write CEM[x[sd]]. For IMCSR, IMSR, IMCSL, IMSL the
// 5-bit s1 field itself is the shift amount and CEM[x[s2]] is shifted.
// Anything else with these opcodes ends at once with instr_illegal.
// rf_wdata is wired straight from cem_rdata: the loaded word is valid in the
// cycle rf_we is high, so it needs no register of its own.
//
// Timing (cycles from the accepting edge to the instr_done cycle, CEM free):
// TEXT S, TEXT L and R-type 3, the step instructions 7 (CEM read 2, block 2,
// CEM write 2, done 1). The LUT steps also wait for lut_ready.
//
// Opcodes, function codes, operand meanings and the EN/ADDR/data/DONE
// handshake are the paper's. The field positions come from the paper's
// instruction-format figure. This design's choices: reading registers as CEM
// addresses for R-type, add[11:0] as a word address (the first 4096 words),
// rs1 naming four consecutive registers, the round key of SUBMX D taken from
// those registers, the s1 field as shift amount, and in-place updates.
//
// Lint reports rst_n as used both asynchronously and synchronously: the
// flip-flops reset asynchronously, and the same signal disables the
// assertions during reset (disable iff), which is intended.
module imc_ctrl
  import imc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // instruction hand-over from the core
  input  logic        instr_valid,
  input  logic [31:0] instr,
  output logic        instr_ready,
  output logic        instr_done,
  output logic        instr_illegal,
  // core register file: combinational read, 4-register write
  output logic [4:0]  rf_raddr [4],
  input  logic [31:0] rf_rdata [4],
  output logic        rf_we,
  output logic [4:0]  rf_waddr,
  output word_t       rf_wdata,
  // compute-enabled memory
  output logic        cem_valid,
  input  logic        cem_ready,
  output cem_cmd_t    cem_cmd,
  input  logic        cem_done,
  input  word_t       cem_rdata,
  // bi-directional shifter
  output logic        sh_en,
  output logic        sh_dir,
  output word_t       sh_din,
  input  logic        sh_done,
  input  word_t       sh_dout,
  // LUT fabric
  input  logic        lut_ready,
  output logic        lut_en,
  output lut_mode_e   lut_mode,
  output word_t       lut_din,
  output word_t       lut_rk,
  input  logic        lut_done,
  input  word_t       lut_dout
);

  typedef enum logic [2:0] {C_NONE, C_TEXT_L, C_TEXT_S, C_SFTR, C_SUBMX, C_SBOX, C_RTYPE}
    cls_e;
  typedef enum logic [2:0] {S_IDLE, S_CEM1, S_BLK, S_CEM2, S_FIN} state_e;

  // -------------------------------------------------------------- decode
  logic [6:0] opc;
  logic [6:0] i_f7;
  logic       i_b;
  logic [4:0] i_rs1;
  logic [11:0] i_add;
  logic [6:0] r_f7;
  logic [2:0] r_f3;
  logic [4:0] r_s1, r_s2, r_sd;

  assign opc   = instr[6:0];
  assign i_b   = instr[7];
  assign i_f7  = instr[14:8];
  assign i_rs1 = instr[19:15];
  assign i_add = instr[31:20];
  assign r_sd  = instr[11:7];
  assign r_f3  = instr[14:12];
  assign r_s2  = instr[19:15];
  assign r_s1  = instr[24:20];
  assign r_f7  = instr[31:25];

  cls_e    d_cls;
  cem_op_e d_rop;
  logic    d_shift;

  always_comb begin
    d_cls   = C_NONE;
    d_rop   = CEM_MOVE;
    d_shift = 1'b0;
    if (opc == OPC_IMC_I) begin
      unique case (i_f7)
        F7_TEXT:  d_cls = i_b ? C_TEXT_S : C_TEXT_L;
        F7_SFTR:  d_cls = C_SFTR;
        F7_SUBMX: d_cls = C_SUBMX;
        F7_SBOX:  d_cls = C_SBOX;
        default:  d_cls = C_NONE;
      endcase
    end else if (opc == OPC_IMC_R) begin
      if (r_f7 == F7_R0) begin
        d_cls = C_RTYPE;
        unique case (r_f3)
          3'd0: d_rop = CEM_MOVE;
          3'd1: d_rop = CEM_ADD;
          3'd2: d_rop = CEM_AND;
          3'd3: d_rop = CEM_OR;
          3'd4: d_rop = CEM_XOR;
          3'd5: d_rop = CEM_NOT;
          3'd6: begin d_rop = CEM_CSR; d_shift = 1'b1; end
          default: begin d_rop = CEM_SR; d_shift = 1'b1; end
        endcase
      end else if (r_f7 == F7_R1 && r_f3 == 3'd0) begin
        d_cls = C_RTYPE; d_rop = CEM_CSL; d_shift = 1'b1;
      end else if (r_f7 == F7_R1 && r_f3 == 3'd1) begin
        d_cls = C_RTYPE; d_rop = CEM_SL;  d_shift = 1'b1;
      end
    end
  end

  // Register operands: four consecutive registers (I-type) or s1, s2, sd.
  always_comb begin
    if (opc == OPC_IMC_R) begin
      rf_raddr[0] = r_s1;
      rf_raddr[1] = r_s2;
      rf_raddr[2] = r_sd;
      rf_raddr[3] = 5'd0;
    end else begin
      for (int i = 0; i < 4; i++) rf_raddr[i] = i_rs1 + 5'(i);
    end
  end

  // --------------------------------------------------------------- state
  state_e   state;
  cls_e     cls;
  logic     dbit;
  logic     issued;
  logic [4:0] base_q;
  cem_cmd_t cmd_q;
  word_t    regs_q;     // x[rs1..rs1+3] (data / round key)
  word_t    st_q;       // state word travelling through a block
  logic     ill_q;

  assign instr_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cls    <= C_NONE;
      dbit   <= 1'b0;
      issued <= 1'b0;
      ill_q  <= 1'b0;
      base_q <= '0;
      cmd_q  <= '0;
      regs_q <= '0;
      st_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (instr_valid) begin
          cls    <= d_cls;
          dbit   <= i_b;
          base_q <= i_rs1;
          issued <= 1'b0;
          ill_q  <= (d_cls == C_NONE);
          regs_q <= {rf_rdata[0], rf_rdata[1], rf_rdata[2], rf_rdata[3]};
          cmd_q  <= '0;
          if (d_cls == C_RTYPE) begin
            cmd_q.op     <= d_rop;
            cmd_q.addr_a <= rf_rdata[0];
            cmd_q.addr_b <= rf_rdata[1];
            cmd_q.addr_d <= rf_rdata[2];
            cmd_q.shamt  <= d_shift ? r_s1 : 5'd0;
          end else begin
            cmd_q.op     <= (d_cls == C_TEXT_S) ? CEM_WRITE : CEM_READ;
            cmd_q.addr_a <= 32'(i_add);
            cmd_q.addr_d <= 32'(i_add);
            cmd_q.wdata  <= {rf_rdata[0], rf_rdata[1], rf_rdata[2], rf_rdata[3]};
          end
          state <= (d_cls == C_NONE) ? S_FIN : S_CEM1;
        end
        S_CEM1: begin
          if (cem_valid && cem_ready) issued <= 1'b1;
          if (cem_done && issued) begin
            issued <= 1'b0;
            st_q   <= cem_rdata;
            if (cls == C_SFTR || cls == C_SUBMX || cls == C_SBOX) state <= S_BLK;
            else state <= S_FIN;
          end
        end
        S_BLK: begin
          if (sh_en || lut_en) issued <= 1'b1;
          if (issued && ((cls == C_SFTR) ? sh_done : lut_done)) begin
            issued       <= 1'b0;
            cmd_q.op     <= CEM_WRITE;
            cmd_q.wdata  <= (cls == C_SFTR) ? sh_dout : lut_dout;
            state        <= S_CEM2;
          end
        end
        S_CEM2: begin
          if (cem_valid && cem_ready) issued <= 1'b1;
          if (cem_done && issued) begin
            issued <= 1'b0;
            state  <= S_FIN;
          end
        end
        default: state <= S_IDLE;   // S_FIN
      endcase
    end
  end

  // --------------------------------------------------------------- outputs
  assign cem_valid = (state == S_CEM1 || state == S_CEM2) && !issued;
  assign cem_cmd   = cmd_q;

  assign sh_en  = (state == S_BLK) && !issued && (cls == C_SFTR);
  assign sh_dir = dbit;
  assign sh_din = st_q;

  assign lut_en   = (state == S_BLK) && !issued && (cls != C_SFTR) && lut_ready;
  assign lut_mode = (cls == C_SUBMX) ? (dbit ? LUT_SUBMX_D : LUT_SUBMX_E)
                                     : (dbit ? LUT_SBOX_D  : LUT_SBOX_E);
  assign lut_din  = st_q;
  assign lut_rk   = regs_q;

  assign rf_we    = (state == S_CEM1) && cem_done && issued && (cls == C_TEXT_L);
  assign rf_waddr = base_q;
  assign rf_wdata = cem_rdata;

  assign instr_done    = (state == S_FIN);
  assign instr_illegal = (state == S_FIN) && ill_q;

  // Handshake rules: one block request at a time, nothing issued while idle.
  a_one_block: assert property (@(posedge clk) disable iff (!rst_n) !(sh_en && lut_en));
  a_idle_quiet: assert property (@(posedge clk) disable iff (!rst_n)
                                 state == S_IDLE |-> !(cem_valid || sh_en || lut_en));

endmodule
