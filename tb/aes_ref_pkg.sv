// aes_ref_pkg: a software reference model of AES-128 for the testbenches.
//
// It is written independently of the RTL: the S-box comes from
// exponent/logarithm tables of the generator 0x03 (inverse of g^k is
// g^(255-k)) rather than from square-and-multiply, the state is handled as
// a 4x4 byte matrix rather than as a flat vector, and MixColumns uses a
// general table-free GF(2^8) multiply. The tables are built by ref_init(),
// which every testbench calls once at time 0. ref_encrypt() is checked
// against the FIPS-197 example vectors by the testbenches themselves.
package aes_ref_pkg;

  typedef logic [7:0] byte_t;
  typedef byte_t mat_t [4][4];   // [row][col]

  byte_t exp_t [256];
  byte_t log_t [256];
  byte_t sbox_t [256];
  bit    ready = 0;

  function automatic byte_t gmul(byte_t a, byte_t b);
    byte_t p = 0;
    byte_t hi;
    for (int i = 0; i < 8; i++) begin
      if (b & 8'h01) p ^= a;
      hi = a & 8'h80;
      a = a << 1;
      if (hi != 0) a ^= 8'h1b;
      b = b >> 1;
    end
    return p;
  endfunction

  function automatic void ref_init();
    byte_t x = 8'h01;
    for (int k = 0; k < 255; k++) begin
      exp_t[k] = x;
      log_t[x] = byte_t'(k);
      x = gmul(x, 8'h03);
    end
    exp_t[255] = exp_t[0];
    for (int a = 0; a < 256; a++) begin
      byte_t inv, s;
      inv = (a == 0) ? 8'h00 : exp_t[(255 - int'(log_t[a])) % 255];
      s = 8'h63;
      for (int bit_i = 0; bit_i < 8; bit_i++) begin
        bit v = inv[bit_i] ^ inv[(bit_i+4)%8] ^ inv[(bit_i+5)%8]
              ^ inv[(bit_i+6)%8] ^ inv[(bit_i+7)%8];
        s[bit_i] = s[bit_i] ^ v;
      end
      sbox_t[a] = s;
    end
    ready = 1;
  endfunction

  function automatic mat_t to_mat(logic [127:0] v);
    mat_t m;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        m[r][c] = v[127 - 8*(4*c + r) -: 8];
    return m;
  endfunction

  function automatic logic [127:0] from_mat(mat_t m);
    logic [127:0] v;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        v[127 - 8*(4*c + r) -: 8] = m[r][c];
    return v;
  endfunction

  function automatic logic [127:0] ref_sub_bytes(logic [127:0] v);
    mat_t m = to_mat(v);
    foreach (m[r, c]) m[r][c] = sbox_t[m[r][c]];
    return from_mat(m);
  endfunction

  function automatic logic [127:0] ref_shift_rows(logic [127:0] v);
    mat_t m = to_mat(v);
    mat_t o;
    foreach (m[r, c]) o[r][c] = m[r][(c + r) % 4];
    return from_mat(o);
  endfunction

  function automatic logic [127:0] ref_mix_columns(logic [127:0] v);
    mat_t m = to_mat(v);
    mat_t o;
    for (int c = 0; c < 4; c++) begin
      o[0][c] = gmul(m[0][c], 2) ^ gmul(m[1][c], 3) ^ m[2][c] ^ m[3][c];
      o[1][c] = m[0][c] ^ gmul(m[1][c], 2) ^ gmul(m[2][c], 3) ^ m[3][c];
      o[2][c] = m[0][c] ^ m[1][c] ^ gmul(m[2][c], 2) ^ gmul(m[3][c], 3);
      o[3][c] = gmul(m[0][c], 3) ^ m[1][c] ^ m[2][c] ^ gmul(m[3][c], 2);
    end
    return from_mat(o);
  endfunction

  // Round key r of the AES-128 schedule.
  function automatic logic [127:0] ref_round_key(logic [127:0] key, int r);
    logic [31:0] w [44];
    byte_t rc = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127 - 32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      logic [31:0] t = w[i-1];
      if (i % 4 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {sbox_t[t[31:24]], sbox_t[t[23:16]], sbox_t[t[15:8]], sbox_t[t[7:0]]};
        t[31:24] ^= rc;
        rc = gmul(rc, 2);
      end
      w[i] = w[i-4] ^ t;
    end
    return {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
  endfunction

  function automatic logic [1407:0] ref_round_keys_flat(logic [127:0] key);
    logic [1407:0] f;
    for (int r = 0; r < 11; r++) f[128*r +: 128] = ref_round_key(key, r);
    return f;
  endfunction

  function automatic logic [127:0] ref_encrypt(logic [127:0] pt, logic [127:0] key);
    logic [1407:0] rk = ref_round_keys_flat(key);
    logic [127:0] s = pt ^ rk[127:0];
    for (int r = 1; r <= 10; r++) begin
      s = ref_shift_rows(ref_sub_bytes(s));
      if (r != 10) s = ref_mix_columns(s);
      s ^= rk[128*r +: 128];
    end
    return s;
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // FIPS-197 Appendix B and C.1 example vectors.
  localparam logic [127:0] FIPS_B_KEY = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [127:0] FIPS_B_PT  = 128'h3243f6a8885a308d313198a2e0370734;
  localparam logic [127:0] FIPS_B_CT  = 128'h3925841d02dc09fbdc118597196a0b32;
  localparam logic [127:0] FIPS_C_KEY = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [127:0] FIPS_C_PT  = 128'h00112233445566778899aabbccddeeff;
  localparam logic [127:0] FIPS_C_CT  = 128'h69c4e0d86a7b0430d8cdb78070b4c55a;

endpackage
