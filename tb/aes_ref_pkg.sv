// aes_ref_pkg: reference AES-128 for the testbenches.
//
// A plain software model of FIPS-197, written independently of the RTL: the
// S-box is found by searching for each byte's multiplicative inverse (not by
// exponentiation as in the design), and the cipher works on a 16-byte array.
// Block and key byte 0 are bits [127:120]. Also provides helpers that map a
// block to the four state rows a tile stores.
package aes_ref_pkg;

  typedef logic [7:0] u8;

  function automatic u8 ref_mul(u8 a, u8 b);
    u8 p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = a[7] ? ((a << 1) ^ 8'h1b) : (a << 1);
    end
    return p;
  endfunction

  function automatic u8 ref_sbox(u8 x);
    u8 inv = 0;
    u8 s;
    if (x != 0)
      for (int y = 1; y < 256; y++) if (ref_mul(x, u8'(y)) == 8'h01) inv = u8'(y);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction

  // All 11 round keys, key j in element j.
  function automatic void ref_expand(input logic [127:0] key, output logic [127:0] rks [11],
                                     input u8 sb [256]);
    logic [31:0] w [44];
    logic [31:0] t;
    u8 rc = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127-32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      t = w[i-1];
      if (i % 4 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {sb[t[31:24]] ^ rc, sb[t[23:16]], sb[t[15:8]], sb[t[7:0]]};
        rc = ref_mul(rc, 8'h02);
      end
      w[i] = w[i-4] ^ t;
    end
    for (int j = 0; j < 11; j++) rks[j] = {w[4*j], w[4*j+1], w[4*j+2], w[4*j+3]};
  endfunction

  function automatic logic [127:0] ref_encrypt(logic [127:0] pt, logic [127:0] key, u8 sb [256]);
    logic [127:0] rks [11];
    u8 s [16];
    u8 t [16];
    u8 a0, a1, a2, a3;
    ref_expand(key, rks, sb);
    for (int i = 0; i < 16; i++) s[i] = pt[127-8*i -: 8] ^ rks[0][127-8*i -: 8];
    for (int rnd = 1; rnd <= 10; rnd++) begin
      for (int i = 0; i < 16; i++) t[i] = sb[s[i]];
      // byte index = r + 4c; ShiftRows: new[r][c] = old[r][(c+r)%4]
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) s[r + 4*c] = t[r + 4*((c + r) % 4)];
      if (rnd != 10)
        for (int c = 0; c < 4; c++) begin
          a0 = s[4*c]; a1 = s[4*c+1]; a2 = s[4*c+2]; a3 = s[4*c+3];
          s[4*c]   = ref_mul(a0, 2) ^ ref_mul(a1, 3) ^ a2 ^ a3;
          s[4*c+1] = a0 ^ ref_mul(a1, 2) ^ ref_mul(a2, 3) ^ a3;
          s[4*c+2] = a0 ^ a1 ^ ref_mul(a2, 2) ^ ref_mul(a3, 3);
          s[4*c+3] = ref_mul(a0, 3) ^ a1 ^ a2 ^ ref_mul(a3, 2);
        end
      for (int i = 0; i < 16; i++) s[i] ^= rks[rnd][127-8*i -: 8];
    end
    ref_encrypt = '0;
    for (int i = 0; i < 16; i++) ref_encrypt[127-8*i -: 8] = s[i];
  endfunction

  // State row r of a block: bytes r, r+4, r+8, r+12, leftmost first.
  function automatic logic [31:0] state_row(logic [127:0] blk, int r);
    return {blk[127-8*r -: 8], blk[127-8*(r+4) -: 8], blk[127-8*(r+8) -: 8], blk[127-8*(r+12) -: 8]};
  endfunction

  // Place a 32-bit state row in the data lanes of tile t of a 256-bit row.
  function automatic logic [255:0] put_tile_row(logic [255:0] row, int t, logic [31:0] v);
    row[255-40*t-8 -: 32] = v;
    return row;
  endfunction

  function automatic logic [31:0] get_tile_row(logic [255:0] row, int t);
    return row[255-40*t-8 -: 32];
  endfunction

  // Byte mask (bit 31-b = byte b) covering the data lanes of tile t.
  function automatic logic [31:0] tile_data_mask(int t);
    logic [31:0] m = '0;
    for (int l = 1; l < 5; l++) m[31-(5*t+l)] = 1'b1;
    return m;
  endfunction

endpackage
