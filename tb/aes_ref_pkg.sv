// aes_ref_pkg: software reference model of AES (FIPS-197) and of the block
// modes, used by the testbenches to compute expected results independently of
// the RTL. Written as plainly as possible: byte arrays, the S-box found by
// searching for the multiplicative inverse, decryption by the textbook inverse
// cipher. The testbenches first check this model against the FIPS-197
// example vectors.
package aes_ref_pkg;

  typedef logic [7:0] st_t [16];

  function automatic logic [7:0] m2(input logic [7:0] a);
    return (a << 1) ^ ((a & 8'h80) != 0 ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r;
    r = 0;
    for (int i = 7; i >= 0; i--) begin
      r = m2(r);
      if (b[i]) r ^= a;
    end
    return r;
  endfunction

  // S-box tables, filled by init_tables() (call once before anything else):
  // inverse by search, then the affine map.
  logic [7:0] sbt [256];
  logic [7:0] isbt [256];
  bit         tables_ok = 0;

  function automatic void init_tables();
    logic [7:0] inv, s;
    for (int x = 0; x < 256; x++) begin
      inv = 0;
      for (int y = 1; y < 256; y++) if (mul(8'(x), 8'(y)) == 8'h01) inv = 8'(y);
      s = inv;
      for (int i = 1; i <= 4; i++) s ^= (inv << i) | (inv >> (8 - i));
      sbt[x] = s ^ 8'h63;
      isbt[s ^ 8'h63] = 8'(x);
    end
    tables_ok = 1;
  endfunction

  function automatic logic [7:0] sb(input logic [7:0] x);
    return sbt[x];
  endfunction

  function automatic logic [7:0] isb(input logic [7:0] x);
    return isbt[x];
  endfunction

  function automatic int nr_of_ks(input int ks);
    return (ks == 0) ? 10 : (ks == 1) ? 12 : 14;
  endfunction

  // Round keys as 128-bit words; key left aligned in 256 bits.
  typedef logic [127:0] rk_t [15];
  function automatic rk_t expand(input logic [255:0] key, input int ks);
    logic [31:0] w [60];
    logic [31:0] t;
    logic [7:0]  rc;
    int nk, nr;
    rk_t rk;
    nk = 4 + 2 * ks;
    nr = nr_of_ks(ks);
    rc = 8'h01;
    for (int i = 0; i < nk; i++) w[i] = key[255-32*i -: 32];
    for (int i = nk; i < 4 * (nr + 1); i++) begin
      t = w[i-1];
      if (i % nk == 0) begin
        t = {t[23:0], t[31:24]};
        t = {sb(t[31:24]), sb(t[23:16]), sb(t[15:8]), sb(t[7:0])} ^ {rc, 24'h0};
        rc = m2(rc);
      end else if (nk > 6 && i % nk == 4) begin
        t = {sb(t[31:24]), sb(t[23:16]), sb(t[15:8]), sb(t[7:0])};
      end
      w[i] = w[i-nk] ^ t;
    end
    for (int r = 0; r < 15; r++) rk[r] = '0;
    for (int r = 0; r <= nr; r++) rk[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
    return rk;
  endfunction

  function automatic st_t to_st(input logic [127:0] b);
    st_t s;
    for (int i = 0; i < 16; i++) s[i] = b[127-8*i -: 8];
    return s;
  endfunction

  function automatic logic [127:0] from_st(input st_t s);
    logic [127:0] b;
    for (int i = 0; i < 16; i++) b[127-8*i -: 8] = s[i];
    return b;
  endfunction

  function automatic logic [127:0] ref_encrypt(input logic [127:0] pt, input logic [255:0] key, input int ks);
    rk_t rk;
    st_t s, t;
    int nr;
    rk = expand(key, ks);
    nr = nr_of_ks(ks);
    s = to_st(pt ^ rk[0]);
    for (int r = 1; r <= nr; r++) begin
      for (int i = 0; i < 16; i++) s[i] = sb(s[i]);
      for (int c = 0; c < 4; c++) for (int w = 0; w < 4; w++) t[4*c+w] = s[4*((c+w)%4)+w];
      s = t;
      if (r != nr)
        for (int c = 0; c < 4; c++) begin
          t[4*c]   = mul(s[4*c],2) ^ mul(s[4*c+1],3) ^ s[4*c+2] ^ s[4*c+3];
          t[4*c+1] = s[4*c] ^ mul(s[4*c+1],2) ^ mul(s[4*c+2],3) ^ s[4*c+3];
          t[4*c+2] = s[4*c] ^ s[4*c+1] ^ mul(s[4*c+2],2) ^ mul(s[4*c+3],3);
          t[4*c+3] = mul(s[4*c],3) ^ s[4*c+1] ^ s[4*c+2] ^ mul(s[4*c+3],2);
        end
      s = to_st(from_st(t) ^ rk[r]);
    end
    return from_st(s);
  endfunction

  function automatic logic [127:0] ref_decrypt(input logic [127:0] ct, input logic [255:0] key, input int ks);
    rk_t rk;
    st_t s, t;
    int nr;
    rk = expand(key, ks);
    nr = nr_of_ks(ks);
    s = to_st(ct ^ rk[nr]);
    for (int r = nr - 1; r >= 0; r--) begin
      for (int c = 0; c < 4; c++) for (int w = 0; w < 4; w++) t[4*((c+w)%4)+w] = s[4*c+w];
      for (int i = 0; i < 16; i++) t[i] = isb(t[i]);
      s = to_st(from_st(t) ^ rk[r]);
      if (r != 0)
        for (int c = 0; c < 4; c++) begin
          t[4*c]   = mul(s[4*c],14) ^ mul(s[4*c+1],11) ^ mul(s[4*c+2],13) ^ mul(s[4*c+3],9);
          t[4*c+1] = mul(s[4*c],9)  ^ mul(s[4*c+1],14) ^ mul(s[4*c+2],11) ^ mul(s[4*c+3],13);
          t[4*c+2] = mul(s[4*c],13) ^ mul(s[4*c+1],9)  ^ mul(s[4*c+2],14) ^ mul(s[4*c+3],11);
          t[4*c+3] = mul(s[4*c],11) ^ mul(s[4*c+1],13) ^ mul(s[4*c+2],9)  ^ mul(s[4*c+3],14);
        end
      else t = s;
      s = t;
    end
    return from_st(s);
  endfunction

  function automatic logic [127:0] cipher(input logic [127:0] x, input logic [255:0] key,
                                          input int ks, input bit enc);
    return enc ? ref_encrypt(x, key, ks) : ref_decrypt(x, key, ks);
  endfunction

  // XTS: tweak times x, tweak read as a little-endian number (IEEE 1619).
  function automatic logic [127:0] xts_next(input logic [127:0] t);
    st_t s;
    logic carry, c2;
    s = to_st(t);
    carry = 0;
    for (int i = 0; i < 16; i++) begin
      c2 = s[i][7];
      s[i] = {s[i][6:0], carry};
      carry = c2;
    end
    if (carry) s[0] ^= 8'h87;
    return from_st(s);
  endfunction

  function automatic logic [127:0] first_bytes(input logic [127:0] x, input int n);
    logic [127:0] r;
    r = 0;
    for (int i = 0; i < n; i++) r[127-8*i -: 8] = x[127-8*i -: 8];
    return r;
  endfunction

  // Slow random 128-bit value.
  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
