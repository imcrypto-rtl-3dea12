// xor_tree: one set of cascaded XOR gates of a LUT fabric module.
//
// Addition in GF(2^8) is bitwise XOR. For each of the four output bytes of a
// state column the tree adds four terms, sum[i] = t[i][0]^t[i][1]^t[i][2]^t[i][3],
// as two levels of 2-input XORs. A LUT fabric module has two such sets, one
// for the encryption terms (RAM reads) and one for the decryption terms
// (encoder products); the paper gives the count, the pairing of the terms is
// the module's routing. Combinational.
module xor_tree
  import imc_pkg::*;
(
  input  byte_t terms [4][4],
  output byte_t sum   [4]
);

  for (genvar i = 0; i < 4; i++) begin : g_row
    byte_t l0, l1;
    assign l0     = terms[i][0] ^ terms[i][1];
    assign l1     = terms[i][2] ^ terms[i][3];
    assign sum[i] = l0 ^ l1;
  end

endmodule
