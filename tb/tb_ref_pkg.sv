// tb_ref_pkg: reference models used by the testbenches.
//
// Written independently of the RTL's own helpers: the S-box is generated
// with the multiply-by-3 / divide-by-3 walk over GF(2^8)* (p runs over all
// non-zero elements, q = 1/p), products use a plain shift-and-add, and the
// AES key schedules (128, 192 and 256-bit keys), block encryption and block
// decryption follow the textbook round structure. Also holds small helpers
// to pack the custom instructions.
package tb_ref_pkg;

  typedef logic [7:0]   b8;
  typedef logic [127:0] w128;

  b8  sb_t  [256];
  b8  isb_t [256];
  bit built = 0;

  function automatic void build();
    b8 p = 8'h01, q = 8'h01, x;
    do begin
      p = p ^ (p << 1) ^ (p[7] ? 8'h1b : 8'h00);
      q ^= q << 1;
      q ^= q << 2;
      q ^= q << 4;
      if (q[7]) q ^= 8'h09;
      x = q ^ {q[6:0], q[7]} ^ {q[5:0], q[7:6]} ^ {q[4:0], q[7:5]} ^ {q[3:0], q[7:4]};
      sb_t[p] = x ^ 8'h63;
    end while (p != 8'h01);
    sb_t[0] = 8'h63;
    for (int i = 0; i < 256; i++) isb_t[sb_t[i]] = 8'(i);
    built = 1;
  endfunction

  function automatic b8 rsbox(b8 a);
    if (!built) build();
    return sb_t[a];
  endfunction

  function automatic b8 risbox(b8 a);
    if (!built) build();
    return isb_t[a];
  endfunction

  function automatic b8 rmul(b8 a, b8 b);
    int unsigned acc = 0;
    for (int i = 0; i < 8; i++) if (b[i]) acc ^= (int'(a) << i);
    for (int i = 14; i >= 8; i--) if (acc[i]) acc ^= (32'h11b << (i - 8));
    return acc[7:0];
  endfunction

  function automatic b8 gb(w128 w, int i);
    return w[127 - 8*i -: 8];
  endfunction

  function automatic w128 sb(w128 w, bit inv);
    w128 r;
    for (int i = 0; i < 16; i++) r[127 - 8*i -: 8] = inv ? risbox(gb(w, i)) : rsbox(gb(w, i));
    return r;
  endfunction

  function automatic w128 sr(w128 w, bit inv);
    w128 r;
    for (int c = 0; c < 4; c++)
      for (int rr = 0; rr < 4; rr++) begin
        int src = inv ? ((c - rr + 4) % 4) : ((c + rr) % 4);
        r[127 - 8*(4*c + rr) -: 8] = gb(w, 4*src + rr);
      end
    return r;
  endfunction

  function automatic w128 mc(w128 w, bit inv);
    w128 r;
    b8 m [4][4];
    if (!inv) m = '{'{2,3,1,1}, '{1,2,3,1}, '{1,1,2,3}, '{3,1,1,2}};
    else      m = '{'{14,11,13,9}, '{9,14,11,13}, '{13,9,14,11}, '{11,13,9,14}};
    for (int c = 0; c < 4; c++)
      for (int i = 0; i < 4; i++) begin
        b8 acc = 0;
        for (int k = 0; k < 4; k++) acc ^= rmul(m[i][k], gb(w, 4*c + k));
        r[127 - 8*(4*c + i) -: 8] = acc;
      end
    return r;
  endfunction

  // AES-128 key schedule: 11 round keys.
  function automatic void expand(w128 key, output w128 rk [11]);
    logic [31:0] wd [44];
    b8 rcon = 8'h01;
    for (int i = 0; i < 4; i++) wd[i] = key[127 - 32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      logic [31:0] t = wd[i-1];
      if (i % 4 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {rsbox(t[31:24]), rsbox(t[23:16]), rsbox(t[15:8]), rsbox(t[7:0])};
        t[31:24] ^= rcon;
        rcon = rmul(rcon, 8'h02);
      end
      wd[i] = wd[i-4] ^ t;
    end
    for (int r = 0; r < 11; r++) rk[r] = {wd[4*r], wd[4*r+1], wd[4*r+2], wd[4*r+3]};
  endfunction

  function automatic w128 aes_enc(w128 pt, w128 key);
    w128 rk [11];
    w128 s;
    expand(key, rk);
    s = pt ^ rk[0];
    for (int r = 1; r < 10; r++) s = mc(sb(sr(s, 0), 0), 0) ^ rk[r];
    return sb(sr(s, 0), 0) ^ rk[10];
  endfunction

  function automatic w128 aes_dec(w128 ct, w128 key);
    w128 rk [11];
    w128 s;
    expand(key, rk);
    s = ct ^ rk[10];
    for (int r = 9; r >= 1; r--) s = mc(sb(sr(s, 1), 1) ^ rk[r], 1);
    return sb(sr(s, 1), 1) ^ rk[0];
  endfunction

  // Key schedule for any AES key size: nk = 4, 6 or 8 key words (AES-128,
  // -192, -256), nr = nk + 6 rounds, nr + 1 round keys in rk[0..nr]. The key
  // is left-aligned in a 256-bit vector.
  function automatic void expand_n(logic [255:0] key, int nk, output w128 rk [15]);
    logic [31:0] wd [60];
    logic [31:0] t;
    b8 rcon;
    int nw;
    rcon = 8'h01;
    nw = 4 * (nk + 7);
    for (int i = 0; i < nk; i++) wd[i] = key[255 - 32*i -: 32];
    for (int i = nk; i < nw; i++) begin
      t = wd[i-1];
      if (i % nk == 0) begin
        t = {t[23:0], t[31:24]};
        t = {rsbox(t[31:24]), rsbox(t[23:16]), rsbox(t[15:8]), rsbox(t[7:0])};
        t[31:24] ^= rcon;
        rcon = rmul(rcon, 8'h02);
      end else if (nk > 6 && i % nk == 4) begin
        t = {rsbox(t[31:24]), rsbox(t[23:16]), rsbox(t[15:8]), rsbox(t[7:0])};
      end
      wd[i] = wd[i-nk] ^ t;
    end
    for (int r = 0; r < 15; r++)
      rk[r] = (r <= nk + 6) ? {wd[4*r], wd[4*r+1], wd[4*r+2], wd[4*r+3]} : '0;
  endfunction

  function automatic w128 aes_enc_n(w128 pt, logic [255:0] key, int nk);
    w128 rk [15];
    w128 s;
    int nr;
    nr = nk + 6;
    expand_n(key, nk, rk);
    s = pt ^ rk[0];
    for (int r = 1; r < nr; r++) s = mc(sb(sr(s, 0), 0), 0) ^ rk[r];
    return sb(sr(s, 0), 0) ^ rk[nr];
  endfunction

  function automatic w128 aes_dec_n(w128 ct, logic [255:0] key, int nk);
    w128 rk [15];
    w128 s;
    int nr;
    nr = nk + 6;
    expand_n(key, nk, rk);
    s = ct ^ rk[nr];
    for (int r = nr - 1; r >= 1; r--) s = mc(sb(sr(s, 1), 1) ^ rk[r], 1);
    return sb(sr(s, 1), 1) ^ rk[0];
  endfunction

  // ------------------------------------------------------ instruction packing
  function automatic logic [31:0] i_type(logic [6:0] f7, bit b, logic [4:0] rs1, logic [11:0] add);
    return {add, rs1, f7, b, 7'b0000111};
  endfunction
  function automatic logic [31:0] r_type(logic [6:0] f7, logic [2:0] f3,
                                         logic [4:0] s1, logic [4:0] s2, logic [4:0] sd);
    return {f7, s1, s2, f3, sd, 7'b1000111};
  endfunction

endpackage
