// racam_encoder: customized encoder at the periphery of a RA/CAM array.
//
// During decryption the RA/CAM array, which stores sbox(x) at row x, is
// searched for a state byte a. Exactly one match line is high, at row
// x = InvSbox(a). The encoder
//   stage 1: turns the one-hot match lines into the 8-bit row index
//            (this is InvSubBytes),
//   stage 2: XORs that byte with a round-key byte (AddRoundKey),
//   stage 3: multiplies the result by 9, 11, 13 and 14 in GF(2^8), the four
//            InvMixColumns coefficients, with fixed combinational logic.
// mul[0..3] are the products by 9, 11, 13 and 14 in that order. cam_out is
// the stage-2 byte; with round_key = 0 it is the plain InvSubBytes result
// used in the last decryption round. hit is low when no row matched.
//
// Purely combinational. The three stages and the four coefficients follow the
// paper; the OR-tree encoding and the extra stage-2 output are this design's
// own choices (the paper shows an 8-bit CAM output and also says the encoder
// gives four 8-bit stage-3 outputs, so both are provided).
module racam_encoder
  import imc_pkg::*;
(
  input  logic [255:0] ml,
  input  byte_t        round_key,
  output logic         hit,
  output byte_t        row,
  output byte_t        cam_out,
  output byte_t        mul [4]
);

  // One-hot to binary: bit k of the row index is the OR of the match lines
  // whose index has bit k set.
  always_comb begin
    row = '0;
    for (int r = 0; r < 256; r++) begin
      if (ml[r]) row = row | 8'(r);
    end
  end

  assign hit     = |ml;
  assign cam_out = row ^ round_key;

  // x9 = x8+x1, x11 = x8+x2+x1, x13 = x8+x4+x1, x14 = x8+x4+x2
  byte_t m2, m4, m8;
  assign m2 = xtime(cam_out);
  assign m4 = xtime(m2);
  assign m8 = xtime(m4);

  assign mul[0] = m8 ^ cam_out;
  assign mul[1] = m8 ^ m2 ^ cam_out;
  assign mul[2] = m8 ^ m4 ^ cam_out;
  assign mul[3] = m8 ^ m4 ^ m2;

endmodule
