// tb_imc_ctrl: the custom-instruction unit against behavioural stand-ins for
// its neighbours, all inside this testbench: a register file, a CEM that
// answers every command after two cycles, a shifter and a LUT fabric that
// answer after one cycle using the reference round functions (the LUT model
// holds lut_ready low for the first cycles to exercise the stall). Every
// custom instruction is issued and its effect on the modelled memory and
// registers is checked, together with instr_illegal and the cycle count from
// acceptance to instr_done.
module tb_imc_ctrl;
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
  logic cem_valid, cem_ready, cem_done;
  cem_cmd_t cem_cmd;
  word_t cem_rdata;
  logic sh_en, sh_dir, sh_done;
  word_t sh_din, sh_dout;
  logic lut_ready, lut_en, lut_done;
  lut_mode_e lut_mode;
  word_t lut_din, lut_rk, lut_dout;
  int checks = 0, failures = 0, cyc = 0, stall = 0;

  imc_ctrl dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // ---------------------------------------------------------- stand-ins
  logic [31:0] xr [32];
  word_t mem [4096];
  always_comb for (int i = 0; i < 4; i++) rf_rdata[i] = xr[rf_raddr[i]];
  always @(posedge clk) if (rf_we) for (int i = 0; i < 4; i++) xr[5'(rf_waddr + 5'(i))] <= rf_wdata[127 - 32*i -: 32];

  logic cbusy = 0;
  cem_cmd_t cq;
  assign cem_ready = !cbusy;
  assign cem_done  = cbusy;
  always @(posedge clk) begin
    if (cem_valid && cem_ready) begin cbusy <= 1; cq <= cem_cmd; end
    else cbusy <= 0;
  end
  function automatic word_t cres(cem_cmd_t c);
    word_t a = mem[c.addr_a[11:0]];
    word_t b = mem[c.addr_b[11:0]];
    word_t r;
    case (c.op)
      CEM_READ, CEM_MOVE: return a;
      CEM_WRITE: return c.wdata;
      CEM_AND: return a & b;
      CEM_OR:  return a | b;
      CEM_XOR: return a ^ b;
      CEM_NOT: return ~a;
      default: begin
        for (int l = 0; l < 4; l++) begin
          logic [31:0] p, q, o;
          p = a[32*l +: 32]; q = b[32*l +: 32];
          case (c.op)
            CEM_ADD: o = p + q;
            CEM_CSR: o = (q >> c.shamt) | (q << (6'd32 - c.shamt));
            CEM_SR:  o = q >> c.shamt;
            CEM_CSL: o = (q << c.shamt) | (q >> (6'd32 - c.shamt));
            default: o = q << c.shamt;
          endcase
          r[32*l +: 32] = o;
        end
        return r;
      end
    endcase
  endfunction
  assign cem_rdata = cres(cq);
  always @(posedge clk) if (cbusy && cq.op != CEM_READ) mem[cq.addr_d[11:0]] <= cres(cq);

  always @(posedge clk) begin
    sh_done <= sh_en;
    if (sh_en) sh_dout <= sr(sh_din, sh_dir);
    lut_done <= lut_en;
    if (lut_en) begin
      case (lut_mode)
        LUT_SUBMX_E: lut_dout <= mc(sb(lut_din, 0), 0);
        LUT_SUBMX_D: lut_dout <= mc(sb(lut_din, 1) ^ lut_rk, 1);
        LUT_SBOX_E:  lut_dout <= sb(lut_din, 0);
        default:     lut_dout <= sb(lut_din, 1);
      endcase
    end
  end
  int lut_cnt = 0;
  assign lut_ready = (lut_cnt >= 20);
  always @(posedge clk) if (rst_n && lut_cnt < 20) lut_cnt <= lut_cnt + 1;
  always @(posedge clk) if (dut.state == dut.S_BLK && !lut_ready) stall++;

  // ---------------------------------------------------------- driver
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic exec(logic [31:0] ins, output int lat, output bit ill);
    int t0;
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = ins; instr_valid = 1;
    @(posedge clk); t0 = cyc; #1; instr_valid = 0;
    while (!instr_done) begin @(posedge clk); #1; end
    lat = cyc - t0;
    ill = instr_illegal;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat; bit ill;
    word_t st, rk, e;
    for (int i = 0; i < 32; i++) xr[i] = 0;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    // SUBMX before the LUT is ready: must wait
    st = {$urandom, $urandom, $urandom, $urandom};
    mem[40] = st;
    exec(i_type(F7_SUBMX, 0, 5'd0, 12'd40), lat, ill);
    chk(mem[40] === mc(sb(st, 0), 0) && !ill, "SUBMX E after stall");
    chk(stall > 0, "LUT stall happened");

    // TEXT S / TEXT L
    st = {$urandom, $urandom, $urandom, $urandom};
    {xr[8], xr[9], xr[10], xr[11]} = st;
    exec(i_type(F7_TEXT, 1, 5'd8, 12'h7ff), lat, ill);
    chk(mem[12'h7ff] === st, "TEXT S");
    chk(lat == 3, $sformatf("TEXT S latency %0d", lat));
    exec(i_type(F7_TEXT, 0, 5'd12, 12'h7ff), lat, ill);
    @(negedge clk);
    chk({xr[12], xr[13], xr[14], xr[15]} === st, "TEXT L");
    chk(lat == 3, $sformatf("TEXT L latency %0d", lat));

    // step instructions, in place
    for (int n = 0; n < 40; n++) begin
      bit d;
      int k;
      d = n[0];
      k = (n / 2) % 3;
      st = {$urandom, $urandom, $urandom, $urandom};
      rk = {$urandom, $urandom, $urandom, $urandom};
      mem[100 + n] = st;
      {xr[20], xr[21], xr[22], xr[23]} = rk;
      case (k)
        0: begin exec(i_type(F7_SFTR, d, 5'd20, 12'(100 + n)), lat, ill); e = sr(st, d); end
        1: begin exec(i_type(F7_SUBMX, d, 5'd20, 12'(100 + n)), lat, ill);
                 e = d ? mc(sb(st, 1) ^ rk, 1) : mc(sb(st, 0), 0); end
        default: begin exec(i_type(F7_SBOX, d, 5'd20, 12'(100 + n)), lat, ill); e = sb(st, d); end
      endcase
      chk(mem[100 + n] === e && !ill, $sformatf("step %0d dir %0d", k, d));
      chk(lat == 7, $sformatf("step latency %0d", lat));
    end

    // R-type: registers 1..3 hold CEM addresses
    for (int n = 0; n < 60; n++) begin
      logic [2:0] f3;
      logic [6:0] f7;
      logic [4:0] s1f;
      cem_cmd_t c;
      int op;
      op = n % 10;
      xr[1] = 200 + $urandom_range(0, 3);
      xr[2] = 200 + $urandom_range(0, 3);
      xr[3] = 300 + n;
      mem[xr[1]] = {$urandom, $urandom, $urandom, $urandom};
      mem[xr[2]] = {$urandom, $urandom, $urandom, $urandom};
      f7 = (op >= 8) ? F7_R1 : F7_R0;
      f3 = (op >= 8) ? 3'(op - 8) : 3'(op);
      s1f = (op == 6 || op == 7 || op >= 8) ? 5'($urandom_range(0, 31)) : 5'd1;
      c = '0;
      c.addr_a = (s1f == 5'd1) ? xr[1] : 0;
      c.addr_b = xr[2];
      c.addr_d = xr[3];
      c.shamt = s1f;
      case (op)
        0: c.op = CEM_MOVE; 1: c.op = CEM_ADD; 2: c.op = CEM_AND; 3: c.op = CEM_OR;
        4: c.op = CEM_XOR;  5: c.op = CEM_NOT; 6: c.op = CEM_CSR; 7: c.op = CEM_SR;
        8: c.op = CEM_CSL;  default: c.op = CEM_SL;
      endcase
      e = cres(c);
      exec(r_type(f7, f3, s1f, 5'd2, 5'd3), lat, ill);
      chk(mem[300 + n] === e && !ill, $sformatf("R-type %0d", op));
      chk(lat == 3, $sformatf("R latency %0d", lat));
    end

    // illegal encodings
    exec(i_type(7'b1111111, 0, 5'd0, 12'd1), lat, ill);
    chk(ill, "illegal I-type funct7");
    exec(r_type(7'b1000000, 3'd5, 5'd1, 5'd2, 5'd3), lat, ill);
    chk(ill, "illegal R-type funct3");
    exec(r_type(7'b0100000, 3'd0, 5'd1, 5'd2, 5'd3), lat, ill);
    chk(ill, "illegal R-type funct7");
    exec(32'h0000_0033, lat, ill);
    chk(ill, "ordinary opcode");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
