// aes_ref_pkg: reference models for the testbenches, written independently
// of the RTL: a table-driven AES-128 (S-box built at first use from the
// multiplicative generator 3), the SecDDR counter rule and a CRC-16 computed
// as the remainder of an augmented message by polynomial long division.
//
// Reference models are written independently of the RTL: a table-driven
// AES, the counter rule in arithmetic form, and CRC long division.
package aes_ref_pkg;

  function automatic byte unsigned rotl8(byte unsigned x, int s);
    return byte'((x << s) | (x >> (8 - s)));
  endfunction

  function automatic void make_sbox(ref byte unsigned sb[256]);
    byte unsigned p = 1, q = 1, x;
    do begin
      p = p ^ byte'(p << 1) ^ ((p & 8'h80) != 0 ? 8'h1b : 8'h00);
      q = q ^ byte'(q << 1);
      q = q ^ byte'(q << 2);
      q = q ^ byte'(q << 4);
      if ((q & 8'h80) != 0) q = q ^ 8'h09;
      x = q ^ rotl8(q, 1) ^ rotl8(q, 2) ^ rotl8(q, 3) ^ rotl8(q, 4);
      sb[p] = x ^ 8'h63;
    end while (p != 1);
    sb[0] = 8'h63;
  endfunction

  function automatic byte unsigned mul2(byte unsigned a);
    return byte'(a << 1) ^ ((a & 8'h80) != 0 ? 8'h1b : 8'h00);
  endfunction

  // state as st[row][col]; input byte n goes to row n%4, column n/4
  function automatic logic [127:0] aes128(logic [127:0] key, logic [127:0] pt);
    byte unsigned sb[256];
    byte unsigned st[4][4], t[4][4];
    byte unsigned w[44][4];
    byte unsigned rc = 1;
    byte unsigned tmp[4];
    logic [127:0] out;
    make_sbox(sb);
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) w[i][j] = key[127 - 8*(4*i+j) -: 8];
    for (int i = 4; i < 44; i++) begin
      tmp = w[i-1];
      if (i % 4 == 0) begin
        tmp = '{sb[w[i-1][1]] ^ rc, sb[w[i-1][2]], sb[w[i-1][3]], sb[w[i-1][0]]};
        rc = mul2(rc);
      end
      for (int j = 0; j < 4; j++) w[i][j] = w[i-4][j] ^ tmp[j];
    end
    for (int n = 0; n < 16; n++) st[n%4][n/4] = pt[127 - 8*n -: 8] ^ w[n/4][n%4];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) t[i][j] = sb[st[i][(j + i) % 4]];
      if (r != 10) begin
        for (int j = 0; j < 4; j++) begin
          st[0][j] = mul2(t[0][j]) ^ mul2(t[1][j]) ^ t[1][j] ^ t[2][j] ^ t[3][j];
          st[1][j] = t[0][j] ^ mul2(t[1][j]) ^ mul2(t[2][j]) ^ t[2][j] ^ t[3][j];
          st[2][j] = t[0][j] ^ t[1][j] ^ mul2(t[2][j]) ^ mul2(t[3][j]) ^ t[3][j];
          st[3][j] = mul2(t[0][j]) ^ t[0][j] ^ t[1][j] ^ t[2][j] ^ mul2(t[3][j]);
        end
      end else st = t;
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) st[i][j] ^= w[4*r + j][i];
    end
    for (int n = 0; n < 16; n++) out[127 - 8*n -: 8] = st[n%4][n/4];
    return out;
  endfunction

  // counter as (steps, type): one step per read, two per write
  function automatic longint unsigned ref_next_ctr(longint unsigned last, bit is_write);
    longint unsigned steps = last / 2;
    steps += is_write ? 2 : 1;
    return 2 * steps + (is_write ? 1 : 0);
  endfunction

  // CRC-16, polynomial 0x11021, as remainder of msg * x^16 (init 0)
  function automatic logic [15:0] ref_crc16(logic [255:0] msg, int nbits);
    logic [271:0] m;
    m = 272'(msg) << 16;        // msg (low nbits bits) then 16 zeros
    for (int i = nbits + 15; i >= 16; i--)
      if (m[i]) m[i -: 17] = m[i -: 17] ^ 17'h11021;
    return m[15:0];
  endfunction

endpackage
