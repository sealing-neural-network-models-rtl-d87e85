// aes_ref_pkg -- plain reference model of AES-128 encryption for the
// testbenches. Written independently of the RTL: the S-box is found by a
// brute-force search for the multiplicative inverse in GF(2^8) followed by
// the affine map, and the cipher works on a 4x4 byte matrix.
package aes_ref_pkg;

  logic [7:0] sb [256];   // S-box, filled on first use
  bit         sb_done = 1'b0;

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa, bb;
    p = 0; aa = a; bb = b;
    for (int i = 0; i < 8; i++) begin
      if (bb[0]) p ^= aa;
      aa = aa[7] ? ((aa << 1) ^ 8'h1b) : (aa << 1);
      bb = bb >> 1;
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] x);
    logic [7:0] inv, r;
    inv = 0;
    if (x != 0)
      for (int c = 1; c < 256; c++)
        if (gmul(x, 8'(c)) == 8'h01) inv = 8'(c);
    r = 8'h63;
    for (int i = 0; i < 8; i++)
      r[i] = r[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return r;
  endfunction

  function automatic logic [127:0] encrypt(input logic [127:0] key, input logic [127:0] pt);
    logic [7:0] s [4][4];
    logic [7:0] t [4][4];
    logic [7:0] w [44][4];
    logic [7:0] tmp [4];
    logic [7:0] rc;
    logic [127:0] o;
    if (!sb_done) begin
      for (int i = 0; i < 256; i++) sb[i] = sbox(8'(i));
      sb_done = 1'b1;
    end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) w[i][j] = key[127 - 8*(4*i+j) -: 8];
    rc = 8'h01;
    for (int i = 4; i < 44; i++) begin
      for (int j = 0; j < 4; j++) tmp[j] = w[i-1][j];
      if (i % 4 == 0) begin
        tmp = '{sb[w[i-1][1]] ^ rc, sb[w[i-1][2]], sb[w[i-1][3]], sb[w[i-1][0]]};
        rc = gmul(rc, 8'h02);
      end
      for (int j = 0; j < 4; j++) w[i][j] = w[i-4][j] ^ tmp[j];
    end
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++)
      s[r][c] = pt[127 - 8*(4*c+r) -: 8] ^ w[c][r];
    for (int rnd = 1; rnd <= 10; rnd++) begin
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) t[r][c] = sb[s[r][(c+r)%4]];
      for (int c = 0; c < 4; c++) begin
        for (int r = 0; r < 4; r++)
          if (rnd < 10)
            s[r][c] = gmul(8'h02, t[r][c]) ^ gmul(8'h03, t[(r+1)%4][c]) ^ t[(r+2)%4][c] ^ t[(r+3)%4][c];
          else
            s[r][c] = t[r][c];
        for (int r = 0; r < 4; r++) s[r][c] ^= w[4*rnd + c][r];
      end
    end
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) o[127 - 8*(4*c+r) -: 8] = s[r][c];
    return o;
  endfunction

endpackage
