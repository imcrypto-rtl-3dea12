// tb_cem: writes random words through the command port and the external
// port, runs every in-memory operation on random operands and compares the
// destination word with a model computed in the testbench (32-bit lanes for
// ADD and the shifts). Checks the 2-cycle command timing, the external-port
// acknowledge and that a command wins over a simultaneous external request.
module tb_cem;
  import imc_pkg::*;
  logic clk = 0, rst_n = 1;
  logic cmd_valid = 0, cmd_ready, cmd_done;
  cem_cmd_t cmd = '0;
  word_t rdata;
  logic ext_req = 0, ext_we = 0, ext_ack;
  logic [15:0] ext_addr = 0;
  word_t ext_wdata = '0, ext_rdata;
  int checks = 0, failures = 0;
  word_t model [int];

  cem dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_done, .rdata,
           .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_ack, .ext_rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic issue(cem_op_e op, int a, int b, int d, int sh, word_t wd, output word_t r);
    @(negedge clk);
    cmd.op = op; cmd.addr_a = a; cmd.addr_b = b; cmd.addr_d = d;
    cmd.shamt = 5'(sh); cmd.wdata = wd; cmd_valid = 1;
    chk(cmd_ready === 1'b1, "ready when idle");
    @(posedge clk); #1; cmd_valid = 0;
    chk(cmd_done === 1'b1 && cmd_ready === 1'b0, "done in the second cycle");
    r = rdata;
    @(posedge clk); #1;
    chk(cmd_done === 1'b0, "done is a pulse");
  endtask

  function automatic word_t ref_op(cem_op_e op, word_t x, word_t y, int sh);
    word_t r;
    unique case (op)
      CEM_MOVE: return x;
      CEM_AND:  return x & y;
      CEM_OR:   return x | y;
      CEM_XOR:  return x ^ y;
      CEM_NOT:  return ~x;
      default: begin
        for (int l = 0; l < 4; l++) begin
          logic [31:0] p = x[32*l +: 32], q = y[32*l +: 32], o;
          case (op)
            CEM_ADD: o = p + q;
            CEM_CSR: o = (q >> sh) | (sh == 0 ? 0 : q << (32 - sh));
            CEM_SR:  o = q >> sh;
            CEM_CSL: o = (q << sh) | (sh == 0 ? 0 : q >> (32 - sh));
            default: o = q << sh;
          endcase
          r[32*l +: 32] = o;
        end
        return r;
      end
    endcase
  endfunction

  initial begin
    word_t r;
    int addrs [16];
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      addrs[i] = (i < 8) ? i : 65535 - i * 7;   // low and high ends of the array
      model[addrs[i]] = {$urandom, $urandom, $urandom, $urandom};
      if (i % 2 == 0) issue(CEM_WRITE, 0, 0, addrs[i], 0, model[addrs[i]], r);
      else begin
        @(negedge clk); ext_req = 1; ext_we = 1; ext_addr = 16'(addrs[i]);
        ext_wdata = model[addrs[i]];
        @(posedge clk); #1; ext_req = 0; ext_we = 0;
        chk(ext_ack === 1'b1, "ext write ack");
        @(posedge clk); #1;
        chk(ext_ack === 1'b0, "ext ack is a pulse");
      end
    end
    for (int i = 0; i < 16; i++) begin
      issue(CEM_READ, addrs[i], 0, 0, 0, '0, r);
      chk(r === model[addrs[i]], $sformatf("read %0d", addrs[i]));
    end
    for (int n = 0; n < 400; n++) begin
      cem_op_e op;
      int a, b, d, sh;
      word_t e;
      op = cem_op_e'($urandom_range(2, 11));
      a = addrs[$urandom_range(0, 15)];
      b = addrs[$urandom_range(0, 15)];
      d = addrs[$urandom_range(0, 15)];
      sh = $urandom_range(0, 31);
      e = ref_op(op, model[a], model[b], sh);
      issue(op, a, b, d, sh, '0, r);
      chk(r === e, $sformatf("op %s result", op.name()));
      model[d] = e;
      issue(CEM_READ, d, 0, 0, 0, '0, r);
      chk(r === e, $sformatf("op %s stored", op.name()));
    end
    // command and external read offered together: the command goes first
    @(negedge clk);
    cmd.op = CEM_READ; cmd.addr_a = addrs[3]; cmd_valid = 1;
    ext_req = 1; ext_we = 0; ext_addr = 16'(addrs[5]);
    @(posedge clk); #1; cmd_valid = 0;
    chk(cmd_done === 1'b1 && ext_ack === 1'b0, "command has priority");
    @(posedge clk); #1;
    @(posedge clk); #1; ext_req = 0;
    chk(ext_ack === 1'b1 && ext_rdata === model[addrs[5]], "ext read after command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
