// aes_ref_pkg: a plain behavioural AES-128 encryption used by the
// testbenches as an independent reference. It shares no code with the RTL:
// the S-box is found by brute-force search for the multiplicative inverse,
// rounds work on a 4x4 byte matrix, and the key schedule is the textbook
// 44-word expansion.
package aes_ref_pkg;

  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p;
    p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = (a << 1) ^ (a[7] ? 8'h1b : 8'h00);
      b >>= 1;
    end
    return p;
  endfunction

  function automatic logic [7:0] ref_sbox(input logic [7:0] x);
    logic [7:0] inv, s;
    inv = 0;
    if (x != 0)
      for (int y = 1; y < 256; y++)
        if (gf_mul(x, 8'(y)) == 8'h01) inv = 8'(y);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction

  logic [7:0] sb [256];
  bit         sb_ready = 0;

  function automatic void init();
    if (!sb_ready) begin
      for (int i = 0; i < 256; i++) sb[i] = ref_sbox(8'(i));
      sb_ready = 1;
    end
  endfunction

  function automatic logic [127:0] aes128(input logic [127:0] key, input logic [127:0] pt);
    logic [31:0] w [44];
    logic [7:0]  m [4][4];   // m[row][col]
    logic [7:0]  t [4][4];
    logic [7:0]  rc;
    logic [31:0] tmp;
    logic [127:0] out;
    init();
    rc = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127-32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      tmp = w[i-1];
      if (i % 4 == 0) begin
        tmp = {sb[tmp[23:16]], sb[tmp[15:8]], sb[tmp[7:0]], sb[tmp[31:24]]};
        tmp[31:24] ^= rc;
        rc = gf_mul(rc, 8'h02);
      end
      w[i] = w[i-4] ^ tmp;
    end
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        m[r][c] = pt[127-8*(4*c+r) -: 8] ^ w[c][31-8*r -: 8];
    for (int rnd = 1; rnd <= 10; rnd++) begin
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++)
          t[r][c] = sb[m[r][(c+r)%4]];
      for (int c = 0; c < 4; c++)
        for (int r = 0; r < 4; r++)
          if (rnd < 10)
            m[r][c] = gf_mul(8'h02, t[r][c]) ^ gf_mul(8'h03, t[(r+1)%4][c])
                    ^ t[(r+2)%4][c] ^ t[(r+3)%4][c];
          else
            m[r][c] = t[r][c];
      for (int c = 0; c < 4; c++)
        for (int r = 0; r < 4; r++)
          m[r][c] ^= w[4*rnd+c][31-8*r -: 8];
    end
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        out[127-8*(4*c+r) -: 8] = m[r][c];
    return out;
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
