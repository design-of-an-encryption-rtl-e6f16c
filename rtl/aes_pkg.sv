// aes_pkg: types, constants and the combinational AES transforms shared by the
// key expansion unit, the two AES round engines and the mode controller.
//
// The mode and key-size encodings are those of the core's interface table
// (Mode[2:0]: 000 GCM, 001 CBC, 010 CTR, 011 ECB, 100 XTS; Ks[1:0]: 00 128,
// 01 192, 10 256 bits). Blocks are 128-bit vectors with byte 0 of the FIPS-197
// byte order in bits [127:120]. The S-box is not stored as a list of numbers:
// it is computed at elaboration from its definition (multiplicative inverse in
// GF(2^8) modulo x^8+x^4+x^3+x+1 followed by the affine map with constant 0x63),
// so synthesis sees a 256-entry constant ROM.
package aes_pkg;

  typedef enum logic [2:0] {
    MODE_GCM = 3'b000,
    MODE_CBC = 3'b001,
    MODE_CTR = 3'b010,
    MODE_ECB = 3'b011,
    MODE_XTS = 3'b100
  } aes_mode_e;

  typedef enum logic [1:0] {
    KS_128 = 2'b00,
    KS_192 = 2'b01,
    KS_256 = 2'b10
  } aes_ks_e;

  typedef logic [127:0] block_t;
  typedef logic [3:0]   rnd_t;   // round index 0..14

  // Number of rounds for a key size.
  function automatic rnd_t nr_of(input logic [1:0] ks);
    case (ks)
      KS_192:  return 4'd12;
      KS_256:  return 4'd14;
      default: return 4'd10;
    endcase
  endfunction

  // ---------------------------------------------------------------- GF(2^8)
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  // S-box from its definition. The inverse comes from exponent/logarithm
  // tables built by stepping through the powers of the generator 0x03
  // (p <- p * 0x03 = p ^ xtime(p)), so inv(x) = 3^(255 - log3(x)); then the
  // affine map b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63.
  typedef logic [7:0] sbox_t [256];

  function automatic sbox_t gen_sbox();
    sbox_t      t;
    logic [255:0][7:0] ex, lg;
    logic [7:0] p, inv;
    p = 8'h01;
    ex = '0;
    lg = '0;
    for (int i = 0; i < 255; i++) begin
      ex[i] = p;
      lg[p] = 8'(i);
      p = p ^ xtime(p);
    end
    for (int x = 0; x < 256; x++) begin
      inv = (x == 0) ? 8'h00 : ex[(255 - int'(lg[x])) % 255];
      t[x] = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]}
                 ^ {inv[3:0], inv[7:4]} ^ 8'h63;
    end
    return t;
  endfunction

  function automatic sbox_t gen_inv_sbox();
    sbox_t s, t;
    s = gen_sbox();
    for (int i = 0; i < 256; i++) t[s[i]] = 8'(i);
    return t;
  endfunction

  localparam sbox_t SBOX     = gen_sbox();
  localparam sbox_t INV_SBOX = gen_inv_sbox();

  // Round constants, rcon(i) = x^(i-1) in GF(2^8); index 1..10 used.
  function automatic logic [7:0] rcon(input logic [3:0] i);
    logic [7:0] r;
    r = 8'h01;
    for (int k = 1; k < 10; k++) if (k < int'(i)) r = xtime(r);
    return r;
  endfunction

  // ---------------------------------------------------------------- bytes
  // Byte n of a block in FIPS-197 order (n = 0 is the first byte).
  function automatic logic [7:0] bget(input block_t b, input int n);
    return b[127-8*n -: 8];
  endfunction

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {SBOX[w[31:24]], SBOX[w[23:16]], SBOX[w[15:8]], SBOX[w[7:0]]};
  endfunction

  function automatic logic [31:0] rot_word(input logic [31:0] w);
    return {w[23:0], w[31:24]};
  endfunction

  // ---------------------------------------------------------------- rounds
  function automatic block_t sub_bytes(input block_t s);
    block_t r;
    for (int n = 0; n < 16; n++) r[127-8*n -: 8] = SBOX[bget(s, n)];
    return r;
  endfunction

  function automatic block_t inv_sub_bytes(input block_t s);
    block_t r;
    for (int n = 0; n < 16; n++) r[127-8*n -: 8] = INV_SBOX[bget(s, n)];
    return r;
  endfunction

  // State byte (row r, column c) is block byte 4c+r; ShiftRows moves row r
  // left by r columns.
  function automatic block_t shift_rows(input block_t s);
    block_t r;
    for (int c = 0; c < 4; c++)
      for (int w = 0; w < 4; w++)
        r[127-8*(4*c+w) -: 8] = bget(s, 4*((c+w)%4)+w);
    return r;
  endfunction

  function automatic block_t inv_shift_rows(input block_t s);
    block_t r;
    for (int c = 0; c < 4; c++)
      for (int w = 0; w < 4; w++)
        r[127-8*(4*((c+w)%4)+w) -: 8] = bget(s, 4*c+w);
    return r;
  endfunction

  function automatic block_t mix_columns(input block_t s);
    block_t r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = bget(s, 4*c); a1 = bget(s, 4*c+1); a2 = bget(s, 4*c+2); a3 = bget(s, 4*c+3);
      r[127-8*(4*c)   -: 8] = xtime(a0) ^ xtime(a1) ^ a1 ^ a2 ^ a3;
      r[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ xtime(a2) ^ a2 ^ a3;
      r[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ xtime(a3) ^ a3;
      r[127-8*(4*c+3) -: 8] = xtime(a0) ^ a0 ^ a1 ^ a2 ^ xtime(a3);
    end
    return r;
  endfunction

  // InvMixColumns as a pre-multiplication followed by MixColumns:
  // a0 ^= 4(a0^a2), a2 ^= 4(a0^a2), a1 ^= 4(a1^a3), a3 ^= 4(a1^a3).
  function automatic block_t inv_mix_columns(input block_t s);
    block_t t;
    logic [7:0] u, v;
    for (int c = 0; c < 4; c++) begin
      u = xtime(xtime(bget(s, 4*c) ^ bget(s, 4*c+2)));
      v = xtime(xtime(bget(s, 4*c+1) ^ bget(s, 4*c+3)));
      t[127-8*(4*c)   -: 8] = bget(s, 4*c)   ^ u;
      t[127-8*(4*c+1) -: 8] = bget(s, 4*c+1) ^ v;
      t[127-8*(4*c+2) -: 8] = bget(s, 4*c+2) ^ u;
      t[127-8*(4*c+3) -: 8] = bget(s, 4*c+3) ^ v;
    end
    return mix_columns(t);
  endfunction

  // One encryption round; the last round has no MixColumns.
  function automatic block_t enc_round(input block_t s, input block_t rk, input logic last);
    block_t t;
    t = shift_rows(sub_bytes(s));
    if (!last) t = mix_columns(t);
    return t ^ rk;
  endfunction

  // One round of the (straight) inverse cipher; the last has no InvMixColumns.
  function automatic block_t dec_round(input block_t s, input block_t rk, input logic last);
    block_t t;
    t = inv_sub_bytes(inv_shift_rows(s)) ^ rk;
    if (!last) t = inv_mix_columns(t);
    return t;
  endfunction

  // ---------------------------------------------------------------- XTS
  // Multiply an XTS tweak by alpha (IEEE 1619): the tweak is read as a
  // little-endian 128-bit number (byte 0 least significant), shifted left by
  // one, and reduced with 0x87 when bit 127 of that number falls out.
  function automatic block_t xts_mul_alpha(input block_t t);
    logic [127:0] le, sh;
    block_t r;
    for (int n = 0; n < 16; n++) le[8*n +: 8] = bget(t, n);
    sh = {le[126:0], 1'b0};
    if (le[127]) sh[7:0] = sh[7:0] ^ 8'h87;
    for (int n = 0; n < 16; n++) r[127-8*n -: 8] = sh[8*n +: 8];
    return r;
  endfunction

  // Mask keeping the first (be+1) bytes of a block.
  function automatic block_t byte_mask(input logic [3:0] be);
    block_t m;
    for (int n = 0; n < 16; n++) m[127-8*n -: 8] = (n <= int'(be)) ? 8'hff : 8'h00;
    return m;
  endfunction

endpackage
