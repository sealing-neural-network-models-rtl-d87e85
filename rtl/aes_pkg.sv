// aes_pkg -- AES-128 (FIPS-197) building blocks shared by the pipelined
// cipher of the memory encryption engine.
//
// The S-box is not pasted in as a table: gen_sbox() builds it at elaboration
// time from GF(2^8) arithmetic. It walks the multiplicative group with the
// generator 3 (p) and its inverse (q = 1/p) at the same time, so that for
// every non-zero p the multiplicative inverse q is known, and applies the
// AES affine map  s = q ^ rotl(q,1) ^ rotl(q,2) ^ rotl(q,3) ^ rotl(q,4) ^ 8'h63.
//
// State convention is the one of FIPS-197: a 128-bit block holds byte 0 in
// bits 127:120; byte i sits in row i%4, column i/4 of the state.
package aes_pkg;

  typedef logic [255:0][7:0] sbox_t;

  function automatic logic [7:0] rotl8(input logic [7:0] x, input int n);
    return 8'((x << n) | (x >> (8 - n)));
  endfunction

  function automatic sbox_t gen_sbox();
    sbox_t      s;
    logic [7:0] p, q;
    s = '0;
    p = 8'h01;
    q = 8'h01;
    for (int i = 0; i < 255; i++) begin
      // p := p * 3
      p = p ^ (p << 1) ^ (p[7] ? 8'h1B : 8'h00);
      // q := q / 3
      q = q ^ (q << 1);
      q = q ^ (q << 2);
      q = q ^ (q << 4);
      if (q[7]) q = q ^ 8'h09;
      s[p] = q ^ rotl8(q, 1) ^ rotl8(q, 2) ^ rotl8(q, 3) ^ rotl8(q, 4) ^ 8'h63;
    end
    s[0] = 8'h63;
    return s;
  endfunction

  localparam sbox_t SBOX = gen_sbox();

  function automatic logic [7:0] xtime(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1B : 8'h00);
  endfunction

  function automatic logic [127:0] sub_bytes(input logic [127:0] s);
    logic [127:0] o;
    for (int i = 0; i < 16; i++) o[8*i +: 8] = SBOX[s[8*i +: 8]];
    return o;
  endfunction

  // byte i of the block (FIPS order) is bits [127-8i -: 8]
  function automatic logic [7:0] get_b(input logic [127:0] s, input int i);
    return s[127-8*i -: 8];
  endfunction

  function automatic logic [127:0] shift_rows(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(r+4*c) -: 8] = get_b(s, r + 4*((c + r) % 4));
    return o;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0]   a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_b(s, 4*c);
      a1 = get_b(s, 4*c + 1);
      a2 = get_b(s, 4*c + 2);
      a3 = get_b(s, 4*c + 3);
      o[127-8*(4*c)   -: 8] = xtime(a0) ^ xtime(a1) ^ a1 ^ a2 ^ a3;
      o[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ xtime(a2) ^ a2 ^ a3;
      o[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ xtime(a3) ^ a3;
      o[127-8*(4*c+3) -: 8] = xtime(a0) ^ a0 ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  // One full round (rounds 1..9) and the last round (no MixColumns).
  function automatic logic [127:0] aes_round(input logic [127:0] s, input logic [127:0] rk);
    return mix_columns(shift_rows(sub_bytes(s))) ^ rk;
  endfunction

  function automatic logic [127:0] aes_final_round(input logic [127:0] s, input logic [127:0] rk);
    return shift_rows(sub_bytes(s)) ^ rk;
  endfunction

  // Next round key from the previous one; rcon is the round constant.
  function automatic logic [127:0] next_round_key(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96];
    w1 = k[95:64];
    w2 = k[63:32];
    w3 = k[31:0];
    // RotWord then SubWord then Rcon
    t  = {SBOX[w3[23:16]], SBOX[w3[15:8]], SBOX[w3[7:0]], SBOX[w3[31:24]]};
    t  = t ^ {rcon, 24'h0};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

endpackage
