// bidir_shifter: the bi-directional shifter block (ShiftRows / InvShiftRows).
//
// Row r of the 4x4 state (bytes r, r+4, r+8, r+12 of the word) is rotated by r
// byte positions: to the left for encryption (dir = 0, ShiftRows), to the
// right for decryption (dir = 1, InvShiftRows):
//   ShiftRows:    b(r,c) = a(r, (c+r) mod 4)
//   InvShiftRows: b(r,c) = a(r, (c-r) mod 4)
// The permutation is pure wiring selected by dir; the result is registered.
//
// Interface/timing: en with dir and din; done pulses one cycle later with dout
// valid (held until the next en).
//
// The function is the paper's; the paper points to an external circuit for
// the insides, so the 2:1 byte multiplexers and the output register are this
// design's choice.
module bidir_shifter
  import imc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  dir,
  input  word_t din,
  output logic  done,
  output word_t dout
);

  word_t perm;

  always_comb begin
    for (int r = 0; r < 4; r++) begin
      for (int c = 0; c < 4; c++) begin
        int unsigned src;
        src = dir ? ((c + 4 - r) % 4) : ((c + r) % 4);
        perm[127 - 8*(4*c + r) -: 8] = get_byte(din, 4*src + r);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      dout <= '0;
    end else begin
      done <= en;
      if (en) dout <= perm;
    end
  end

endmodule
