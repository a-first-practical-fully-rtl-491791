// kpu_tb_pkg -- testbench support: an independent reference model of the
// 64-bit Rijndael codec and a small assembler for the processor's
// instruction set (OpenRISC 1000 encodings plus the prefix instruction).
//
// The reference cipher works on a byte array and finds S-box values and
// inverses by search, so it shares no code with the design. It also checks
// itself against published AES S-box entries (see sbox_selftest).
package kpu_tb_pkg;

  typedef logic [7:0] bytes8_t [8];

  // ------------------------------------------------------------ GF(2^8)
  function automatic logic [7:0] r_mul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11b << (i - 8);
    return p[7:0];
  endfunction

  function automatic logic [7:0] r_sbox(input logic [7:0] x);
    logic [7:0] inv, s;
    inv = 8'h00;
    for (int c = 1; c < 256; c++) if (r_mul(x, 8'(c)) == 8'h01) inv = 8'(c);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction

  function automatic logic [7:0] r_inv_sbox(input logic [7:0] y);
    for (int c = 0; c < 256; c++) if (r_sbox(8'(c)) == y) return 8'(c);
    return 8'h00;
  endfunction

  // published AES S-box entries
  function automatic int sbox_selftest();
    int bad;
    bad = 0;
    if (r_sbox(8'h00) != 8'h63) bad++;
    if (r_sbox(8'h01) != 8'h7c) bad++;
    if (r_sbox(8'h53) != 8'hed) bad++;
    if (r_sbox(8'hff) != 8'h16) bad++;
    if (r_sbox(8'h10) != 8'hca) bad++;
    return bad;
  endfunction

  // ------------------------------------------------------- key expansion
  typedef logic [63:0] rk_t [11];

  function automatic rk_t r_expand(input logic [63:0] key);
    logic [7:0] w [22][4];
    logic [7:0] t [4];
    logic [7:0] rc;
    rk_t rk;
    for (int b = 0; b < 4; b++) begin
      w[0][b] = key[63-8*b -: 8];
      w[1][b] = key[31-8*b -: 8];
    end
    rc = 8'h01;
    for (int i = 2; i < 22; i++) begin
      for (int b = 0; b < 4; b++) t[b] = w[i-1][b];
      if (i % 2 == 0) begin
        logic [7:0] t0;
        t0 = t[0];
        t[0] = r_sbox(t[1]) ^ rc; t[1] = r_sbox(t[2]); t[2] = r_sbox(t[3]); t[3] = r_sbox(t0);
        rc = r_mul(rc, 8'h02);
      end
      for (int b = 0; b < 4; b++) w[i][b] = w[i-2][b] ^ t[b];
    end
    for (int r = 0; r < 11; r++)
      rk[r] = {w[2*r][0], w[2*r][1], w[2*r][2], w[2*r][3],
               w[2*r+1][0], w[2*r+1][1], w[2*r+1][2], w[2*r+1][3]};
    return rk;
  endfunction

  // ---------------------------------------------------- cipher on bytes
  function automatic bytes8_t to_b(input logic [63:0] v);
    bytes8_t b;
    for (int j = 0; j < 8; j++) b[j] = v[63-8*j -: 8];
    return b;
  endfunction
  function automatic logic [63:0] from_b(input bytes8_t b);
    logic [63:0] v;
    for (int j = 0; j < 8; j++) v[63-8*j -: 8] = b[j];
    return v;
  endfunction

  function automatic bytes8_t r_mix(input bytes8_t s, input logic inv);
    bytes8_t o;
    logic [7:0] m [4];
    m = inv ? '{8'd14, 8'd11, 8'd13, 8'd9} : '{8'd2, 8'd3, 8'd1, 8'd1};
    for (int c = 0; c < 2; c++)
      for (int r = 0; r < 4; r++) begin
        o[4*c+r] = 8'h00;
        for (int k = 0; k < 4; k++) o[4*c+r] ^= r_mul(m[(k - r + 4) % 4], s[4*c+k]);
      end
    return o;
  endfunction

  function automatic bytes8_t r_shift(input bytes8_t s);
    bytes8_t o;
    // row r of column c comes from column (c + r) mod 2
    for (int c = 0; c < 2; c++)
      for (int r = 0; r < 4; r++) o[4*c+r] = s[4*((c + r) % 2) + r];
    return o;
  endfunction

  function automatic logic [63:0] r_encrypt(input logic [63:0] key, input logic [63:0] pt);
    rk_t rk;
    bytes8_t s;
    rk = r_expand(key);
    s  = to_b(pt ^ rk[0]);
    for (int r = 1; r <= 10; r++) begin
      for (int j = 0; j < 8; j++) s[j] = r_sbox(s[j]);
      s = r_shift(s);
      if (r != 10) s = r_mix(s, 1'b0);
      s = to_b(from_b(s) ^ rk[r]);
    end
    return from_b(s);
  endfunction

  function automatic logic [63:0] r_decrypt(input logic [63:0] key, input logic [63:0] ct);
    rk_t rk;
    bytes8_t s;
    rk = r_expand(key);
    s  = to_b(ct ^ rk[10]);
    for (int r = 9; r >= 0; r--) begin
      s = r_shift(s);
      for (int j = 0; j < 8; j++) s[j] = r_inv_sbox(s[j]);
      s = to_b(from_b(s) ^ rk[r]);
      if (r != 0) s = r_mix(s, 1'b1);
    end
    return from_b(s);
  endfunction

  // codec with the program-address forms
  function automatic logic [63:0] kpu_enc(input logic [63:0] key, input logic [63:0] pt);
    if (pt[63:48] == 16'h7fff) return {32'h0, pt[31:0]};
    return r_encrypt(key, pt);
  endfunction
  function automatic logic [63:0] kpu_dec(input logic [63:0] key, input logic [63:0] ct);
    if (ct[63:32] == 32'h0) return {16'h7fff, 16'h0, ct[31:0]};
    return r_decrypt(key, ct);
  endfunction

  // ------------------------------------------------------------ assembler
  function automatic logic [31:0] i_rrr(input logic [3:0] fn, input int rd, input int ra, input int rb);
    return {6'h38, 5'(rd), 5'(ra), 5'(rb), 7'h0, fn};
  endfunction
  function automatic logic [31:0] i_ri(input logic [5:0] op, input int rd, input int ra, input logic [15:0] k);
    return {op, 5'(rd), 5'(ra), k};
  endfunction
  function automatic logic [31:0] i_sf(input int cond, input int ra, input int rb);
    return {6'h39, 5'(cond), 5'(ra), 5'(rb), 11'h0};
  endfunction
  function automatic logic [31:0] i_sw(input logic [15:0] off, input int ra, input int rb);
    return {6'h35, off[15:11], 5'(ra), 5'(rb), off[10:0]};
  endfunction
  function automatic logic [31:0] i_lwz(input int rd, input logic [15:0] off, input int ra);
    return {6'h21, 5'(rd), 5'(ra), off};
  endfunction
  function automatic logic [31:0] i_br(input logic [5:0] op, input logic [31:0] from, input logic [31:0] to);
    logic [31:0] d;
    d = (to - from) >> 2;
    return {op, d[25:0]};
  endfunction
  function automatic logic [31:0] i_nop(input logic [15:0] k);
    return {8'h15, 8'h00, k};
  endfunction
  function automatic logic [31:0] i_mtspr(input int ra, input int rb, input logic [15:0] k);
    return {6'h30, k[15:11], 5'(ra), 5'(rb), k[10:0]};
  endfunction
  function automatic logic [31:0] i_mfspr(input int rd, input int ra, input logic [15:0] k);
    return {6'h2d, 5'(rd), 5'(ra), k};
  endfunction
  function automatic logic [31:0] i_pfx(input logic [23:0] seg);
    return {6'h1c, 2'b00, seg};
  endfunction

  localparam logic [31:0] I_RFE = 32'h2400_0000;
  localparam logic [31:0] I_SYS = 32'h2000_0000;

  // plaintext block the assembler encrypts for an immediate
  function automatic logic [63:0] imm_block(input logic [31:0] v, input int salt);
    return {16'h1234 ^ 16'(salt), 16'h5678, v};
  endfunction

endpackage
