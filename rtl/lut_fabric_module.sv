// lut_fabric_module: one LUT fabric module, computing one state column.
//
// Contents: 4 RA/CAM arrays holding 1*sbox(x), 8 RAM arrays holding 2*sbox(x)
// and 3*sbox(x) (RAM 2k and 2k+1 belong to input row k), and two XOR trees.
// The four input bytes a0..a3 of one column go "transposed" to the arrays:
// byte a_k addresses (or is searched in) the arrays of row k.
//
//   LUT_SUBMX_E  SubBytes+MixColumns. Every array is read in RAM mode with
//                address a_k; the encryption XOR tree forms
//                b_i = 2s(a_i) ^ 3s(a_i+1) ^ s(a_i+2) ^ s(a_i+3) (indices mod 4).
//   LUT_SUBMX_D  InvSubBytes+AddRoundKey+InvMixColumns. The four RA/CAM arrays
//                are searched for a_k in CAM mode; encoder k yields
//                y_k = InvSbox(a_k) ^ rk_k times 9, 11, 13, 14, and the
//                decryption XOR tree forms b_i = sum_k Minv[i][k]*y_k with the
//                InvMixColumns matrix rows (14 11 13 9), (9 14 11 13), ...
//                The RAM arrays stay idle.
//   LUT_SBOX_E   last encryption round: b_i = s(a_i) from the RA/CAM RAM read.
//   LUT_SBOX_D   last decryption round: b_i = InvSbox(a_i) from a CAM search
//                with the round-key input forced to 0.
//
// Interface/timing: en with mode, col_in and rk starts an operation; col_out
// is valid (valid high) in the next cycle and holds until the next en. The
// prog_* port writes row prog_addr of all arrays at once (1*, 2*, 3*sbox).
//
// The array counts, their contents, the transposed addressing and the three
// decryption stages are the paper's. The one-cycle latency, the row-to-array
// assignment and the use of the encoder's stage-2 output for LUT_SBOX_D are
// this design's choices.
//
// Lint reports rst_n as used both asynchronously and synchronously: the
// flip-flops reset asynchronously, and the same signal disables the
// assertions during reset (disable iff), which is intended.
module lut_fabric_module
  import imc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // table programming (RAM-mode writes)
  input  logic      prog_we,
  input  byte_t     prog_addr,
  input  byte_t     prog_s1,
  input  byte_t     prog_s2,
  input  byte_t     prog_s3,
  // operation
  input  logic      en,
  input  lut_mode_e mode,
  input  byte_t     col_in [4],
  input  byte_t     rk     [4],
  output logic      valid,
  output byte_t     col_out [4]
);

  logic      ram_rd, racam_rd, cam_srch;
  lut_mode_e mode_q;

  assign ram_rd   = en && (mode == LUT_SUBMX_E);
  assign racam_rd = en && (mode == LUT_SUBMX_E || mode == LUT_SBOX_E);
  assign cam_srch = en && (mode == LUT_SUBMX_D || mode == LUT_SBOX_D);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= 1'b0;
      mode_q <= LUT_SUBMX_E;
    end else begin
      valid <= en;
      if (en) mode_q <= mode;
    end
  end

  // Round key seen by the encoders: held with the search, zero for SBOX_D.
  byte_t rk_q [4];
  always_ff @(posedge clk) begin
    if (en) begin
      for (int k = 0; k < 4; k++) rk_q[k] <= (mode == LUT_SBOX_D) ? 8'h00 : rk[k];
    end
  end

  byte_t s1 [4], s2 [4], s3 [4];   // 1*, 2*, 3*sbox(a_k)
  byte_t camv [4];                 // InvSbox(a_k) ^ rk_k
  byte_t cmul [4][4];              // encoder products, [k][x9,x11,x13,x14]
  logic  chit [4];

  for (genvar k = 0; k < 4; k++) begin : g_row
    racam_array u_racam (
      .clk         (clk),
      .we          (prog_we),
      .re          (racam_rd),
      .addr        (prog_we ? prog_addr : col_in[k]),
      .wdata       (prog_s1),
      .ram_out     (s1[k]),
      .search_en   (cam_srch),
      .search_data (col_in[k]),
      .round_key   (rk_q[k]),
      .cam_hit     (chit[k]),
      .cam_out     (camv[k]),
      .cam_mul     (cmul[k])
    );
    ram_array #(.DEPTH(256), .WIDTH(8)) u_ram2 (
      .clk (clk), .we (prog_we), .re (ram_rd),
      .addr (prog_we ? prog_addr : col_in[k]), .wdata (prog_s2), .rdata (s2[k])
    );
    ram_array #(.DEPTH(256), .WIDTH(8)) u_ram3 (
      .clk (clk), .we (prog_we), .re (ram_rd),
      .addr (prog_we ? prog_addr : col_in[k]), .wdata (prog_s3), .rdata (s3[k])
    );
  end

  // Index into cmul[k][*] of the coefficient c = {14,11,13,9}[(k-i) mod 4].
  function automatic int unsigned inv_sel(int unsigned i, int unsigned k);
    case ((k - i) & 3)
      0:       return 3;  // 14
      1:       return 1;  // 11
      2:       return 2;  // 13
      default: return 0;  // 9
    endcase
  endfunction

  byte_t terms_e [4][4], terms_d [4][4];
  byte_t sum_e [4], sum_d [4];

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      terms_e[i][0] = s2[i];
      terms_e[i][1] = s3[(i + 1) % 4];
      terms_e[i][2] = s1[(i + 2) % 4];
      terms_e[i][3] = s1[(i + 3) % 4];
      for (int k = 0; k < 4; k++) terms_d[i][k] = cmul[k][inv_sel(i, k)];
    end
  end

  xor_tree u_xor_enc (.terms (terms_e), .sum (sum_e));
  xor_tree u_xor_dec (.terms (terms_d), .sum (sum_d));

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      unique case (mode_q)
        LUT_SUBMX_E: col_out[i] = sum_e[i];
        LUT_SUBMX_D: col_out[i] = sum_d[i];
        LUT_SBOX_E:  col_out[i] = s1[i];
        default:     col_out[i] = camv[i];
      endcase
    end
  end

  // Every search of a programmed table must find its byte.
  a_cam_hit: assert property (@(posedge clk) disable iff (!rst_n)
      valid && (mode_q == LUT_SUBMX_D || mode_q == LUT_SBOX_D)
      |-> (chit[0] && chit[1] && chit[2] && chit[3]));

endmodule
