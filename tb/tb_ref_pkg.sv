// tb_ref_pkg: reference models used by the testbenches.
//
// Everything here is written independently of the RTL: the AES S-box comes
// from GF(2^8) exponent/logarithm tables with generator 3 and a bitwise
// affine map, the cipher works on a 4x4 byte matrix with a textbook key
// schedule, and the GGM, LFSR and index functions are bit-serial loops.
package tb_ref_pkg;

  typedef logic [127:0] blk_t;

  function automatic logic [7:0] mul2(input logic [7:0] a);
    return (a << 1) ^ ((a & 8'h80) != 0 ? 8'h1b : 8'h00);
  endfunction

  logic [7:0] sb_tab [256];
  bit         sb_ready = 1'b0;

  function automatic logic [7:0] sbox_slow(input logic [7:0] a);
    logic [7:0] ex [256];
    logic [7:0] lg [256];
    logic [7:0] x, inv, r;
    x = 8'h01;
    for (int i = 0; i < 255; i++) begin
      ex[i] = x;
      lg[x] = 8'(i);
      x = mul2(x) ^ x;           // multiply by generator 3
    end
    inv = (a == 0) ? 8'h00 : ex[(255 - int'(lg[a])) % 255];
    for (int i = 0; i < 8; i++)
      r[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return r ^ 8'h63;
  endfunction

  // S-box, tabulated on first use.
  function automatic logic [7:0] sbox(input logic [7:0] a);
    if (!sb_ready) begin
      for (int i = 0; i < 256; i++) sb_tab[i] = sbox_slow(8'(i));
      sb_ready = 1'b1;
    end
    return sb_tab[a];
  endfunction

  // 11 round keys of AES-128, round key 0 = key.
  function automatic void expand_key(input blk_t key, output blk_t rk [11]);
    logic [31:0] wd [44];
    logic [31:0] tmp;
    logic [7:0]  rcon;
    rcon = 8'h01;
    for (int i = 0; i < 4; i++) wd[i] = key[127-32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      tmp = wd[i-1];
      if (i % 4 == 0) begin
        tmp = {sbox(tmp[23:16]), sbox(tmp[15:8]), sbox(tmp[7:0]), sbox(tmp[31:24])};
        tmp[31:24] ^= rcon;
        rcon = mul2(rcon);
      end
      wd[i] = wd[i-4] ^ tmp;
    end
    for (int r = 0; r < 11; r++) rk[r] = {wd[4*r], wd[4*r+1], wd[4*r+2], wd[4*r+3]};
  endfunction

  function automatic blk_t aes_enc(input blk_t pt, input blk_t rk [11]);
    logic [7:0] s [4][4];   // s[row][col]
    logic [7:0] t [4][4];
    blk_t x;
    x = pt ^ rk[0];
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) s[r][c] = x[127 - 8*(4*c + r) -: 8];
    for (int rnd = 1; rnd <= 10; rnd++) begin
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) t[r][c] = sbox(s[r][(c + r) % 4]);
      if (rnd != 10) begin
        for (int c = 0; c < 4; c++) begin
          s[0][c] = mul2(t[0][c]) ^ mul2(t[1][c]) ^ t[1][c] ^ t[2][c] ^ t[3][c];
          s[1][c] = t[0][c] ^ mul2(t[1][c]) ^ mul2(t[2][c]) ^ t[2][c] ^ t[3][c];
          s[2][c] = t[0][c] ^ t[1][c] ^ mul2(t[2][c]) ^ mul2(t[3][c]) ^ t[3][c];
          s[3][c] = mul2(t[0][c]) ^ t[0][c] ^ t[1][c] ^ t[2][c] ^ mul2(t[3][c]);
        end
      end else begin
        s = t;
      end
      for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++)
        s[r][c] ^= rk[rnd][127 - 8*(4*c + r) -: 8];
    end
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) x[127 - 8*(4*c + r) -: 8] = s[r][c];
    return x;
  endfunction

  // Leaf j of a GGM tree of height h with root seed; left child = AES_k0,
  // right child = AES_k1, path taken from the bits of j, MSB first.
  function automatic blk_t ggm_node(input blk_t root, input int lvl, input int j,
                                    input blk_t rk0 [11], input blk_t rk1 [11]);
    blk_t x;
    x = root;
    for (int b = lvl - 1; b >= 0; b--) x = ((j >> b) & 1) ? aes_enc(x, rk1) : aes_enc(x, rk0);
    return x;
  endfunction

  // Seeded LFSR, x^32+x^22+x^2+x+1, 32 steps, aux bit t injected at step t.
  function automatic logic [31:0] mlfsr(input logic [31:0] seed, input logic [31:0] aux);
    logic [31:0] x;
    x = seed;
    for (int t = 0; t < 32; t++) begin
      x = (x << 1) | 32'(((x >> 31) ^ (x >> 21) ^ (x >> 1) ^ x ^ (aux >> t)) & 1);
    end
    return x;
  endfunction

  // Index of the j-th nonzero of column i+l of A.
  function automatic int unsigned a_index(input logic [31:0] a_seed, input int unsigned i,
                                          input int unsigned l, input int unsigned j,
                                          input int unsigned k);
    logic [31:0] s, r;
    longint unsigned p;
    s = mlfsr(a_seed + (i + 1) * (l + 1), 32'd1);
    r = mlfsr(mlfsr(s + (32'd1 << j) + i + j, 32'(j)), s);
    p = longint'(r >> 16) * k;
    return int'(p >> 16);
  endfunction

endpackage
