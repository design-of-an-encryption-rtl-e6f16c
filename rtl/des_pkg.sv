// des_pkg: the DES primitives used by the 3DES core.
//
// The permutation and substitution tables are those of FIPS 46-3 and are the
// definition of the algorithm, so they are written out; the expansion E and
// the final permutation (the inverse of IP) are computed from their rules
// instead. Bit numbering follows the standard: bit 1 is the most significant
// bit of a word, so table entry t of an n-bit input is in[n-t].
package des_pkg;

  typedef logic [63:0] dblock_t;
  typedef logic [47:0] subkey_t;

  localparam logic [0:63][7:0] IP_T = {
    8'd58, 8'd50, 8'd42, 8'd34, 8'd26, 8'd18, 8'd10, 8'd2,
    8'd60, 8'd52, 8'd44, 8'd36, 8'd28, 8'd20, 8'd12, 8'd4,
    8'd62, 8'd54, 8'd46, 8'd38, 8'd30, 8'd22, 8'd14, 8'd6,
    8'd64, 8'd56, 8'd48, 8'd40, 8'd32, 8'd24, 8'd16, 8'd8,
    8'd57, 8'd49, 8'd41, 8'd33, 8'd25, 8'd17, 8'd9,  8'd1,
    8'd59, 8'd51, 8'd43, 8'd35, 8'd27, 8'd19, 8'd11, 8'd3,
    8'd61, 8'd53, 8'd45, 8'd37, 8'd29, 8'd21, 8'd13, 8'd5,
    8'd63, 8'd55, 8'd47, 8'd39, 8'd31, 8'd23, 8'd15, 8'd7};

  localparam logic [0:31][7:0] P_T = {
    8'd16, 8'd7,  8'd20, 8'd21, 8'd29, 8'd12, 8'd28, 8'd17,
    8'd1,  8'd15, 8'd23, 8'd26, 8'd5,  8'd18, 8'd31, 8'd10,
    8'd2,  8'd8,  8'd24, 8'd14, 8'd32, 8'd27, 8'd3,  8'd9,
    8'd19, 8'd13, 8'd30, 8'd6,  8'd22, 8'd11, 8'd4,  8'd25};

  localparam logic [0:55][7:0] PC1_T = {
    8'd57, 8'd49, 8'd41, 8'd33, 8'd25, 8'd17, 8'd9,
    8'd1,  8'd58, 8'd50, 8'd42, 8'd34, 8'd26, 8'd18,
    8'd10, 8'd2,  8'd59, 8'd51, 8'd43, 8'd35, 8'd27,
    8'd19, 8'd11, 8'd3,  8'd60, 8'd52, 8'd44, 8'd36,
    8'd63, 8'd55, 8'd47, 8'd39, 8'd31, 8'd23, 8'd15,
    8'd7,  8'd62, 8'd54, 8'd46, 8'd38, 8'd30, 8'd22,
    8'd14, 8'd6,  8'd61, 8'd53, 8'd45, 8'd37, 8'd29,
    8'd21, 8'd13, 8'd5,  8'd28, 8'd20, 8'd12, 8'd4};

  localparam logic [0:47][7:0] PC2_T = {
    8'd14, 8'd17, 8'd11, 8'd24, 8'd1,  8'd5,
    8'd3,  8'd28, 8'd15, 8'd6,  8'd21, 8'd10,
    8'd23, 8'd19, 8'd12, 8'd4,  8'd26, 8'd8,
    8'd16, 8'd7,  8'd27, 8'd20, 8'd13, 8'd2,
    8'd41, 8'd52, 8'd31, 8'd37, 8'd47, 8'd55,
    8'd30, 8'd40, 8'd51, 8'd45, 8'd33, 8'd48,
    8'd44, 8'd49, 8'd39, 8'd56, 8'd34, 8'd53,
    8'd46, 8'd42, 8'd50, 8'd36, 8'd29, 8'd32};

  // Left rotations of the key halves before rounds 1..16 (1 or 2).
  localparam logic [0:15] SHIFT2 = 16'b0011_1111_0111_1110;

  // S-boxes S1..S8, one 64-bit word per row, column 0 in the top nibble.
  localparam logic [0:7][0:3][63:0] SBOX_T = '{
    '{64'he4d12fb83a6c5907, 64'h0f74e2d1a6cb9538, 64'h41e8d62bfc973a50, 64'hfc8249175b3ea06d},
    '{64'hf18e6b34972dc05a, 64'h3d47f28ec01a69b5, 64'h0e7ba4d158c6932f, 64'hd8a13f42b67c05e9},
    '{64'ha09e63f51dc7b428, 64'hd709346a285ecbf1, 64'hd6498f30b12c5ae7, 64'h1ad069874fe3b52c},
    '{64'h7de3069a1285bc4f, 64'hd8b56f03472c1ae9, 64'ha690cb7df13e5284, 64'h3f06a1d8945bc72e},
    '{64'h2c417ab6853fd0e9, 64'heb2c47d150fa3986, 64'h421bad78f9c5630e, 64'hb8c71e2d6f09a453},
    '{64'hc1af92680d34e75b, 64'haf427c9561de0b38, 64'h9ef528c3704a1db6, 64'h432c95fabe17608d},
    '{64'h4b2ef08d3c975a61, 64'hd0b7491ae35c2f86, 64'h14bdc37eaf680592, 64'h6bd814a7950fe23c},
    '{64'hd2846fb1a93e50c7, 64'h1fd8a374c56b0e92, 64'h7b419ce206adf358, 64'h21e74a8dfc90356b}};

  function automatic dblock_t ip(input dblock_t x);
    dblock_t r;
    for (int i = 0; i < 64; i++) r[63-i] = x[64-int'(IP_T[i])];
    return r;
  endfunction

  // Final permutation: the inverse of IP.
  function automatic dblock_t fp(input dblock_t x);
    dblock_t r;
    for (int i = 0; i < 64; i++) r[64-int'(IP_T[i])] = x[63-i];
    return r;
  endfunction

  // Expansion E: output group i (6 bits) is input bits 4i .. 4i+5 (1-based,
  // cyclic), i.e. each 4-bit group with its neighbours' edge bits.
  function automatic logic [47:0] expand(input logic [31:0] r);
    logic [47:0] e;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 6; j++)
        e[47-(6*i+j)] = r[31 - ((4*i + j - 1 + 32) % 32)];
    return e;
  endfunction

  // Round function f(R, K).
  function automatic logic [31:0] feistel(input logic [31:0] r, input subkey_t k);
    logic [47:0] x;
    logic [31:0] s, p;
    logic [5:0]  b;
    x = expand(r) ^ k;
    for (int i = 0; i < 8; i++) begin
      b = x[47-6*i -: 6];
      s[31-4*i -: 4] = SBOX_T[i][{b[5], b[0]}][63-4*int'(b[4:1]) -: 4];
    end
    for (int i = 0; i < 32; i++) p[31-i] = s[32-int'(P_T[i])];
    return p;
  endfunction

  // The 16 round keys of one DES key (parity bits ignored).
  typedef subkey_t sched_t [16];
  function automatic sched_t key_schedule(input logic [63:0] key);
    logic [55:0] cd;
    logic [27:0] c, d;
    sched_t ks;
    for (int i = 0; i < 56; i++) cd[55-i] = key[64-int'(PC1_T[i])];
    c = cd[55:28];
    d = cd[27:0];
    for (int r = 0; r < 16; r++) begin
      if (SHIFT2[r]) begin c = {c[25:0], c[27:26]}; d = {d[25:0], d[27:26]}; end
      else           begin c = {c[26:0], c[27]};    d = {d[26:0], d[27]};    end
      cd = {c, d};
      for (int i = 0; i < 48; i++) ks[r][47-i] = cd[56-int'(PC2_T[i])];
    end
    return ks;
  endfunction

  // A DES key byte has odd parity; 1 when some byte of the key does not.
  function automatic logic parity_error(input logic [63:0] key);
    logic err;
    err = 1'b0;
    for (int i = 0; i < 8; i++) if (!(^key[8*i +: 8])) err = 1'b1;
    return err;
  endfunction

endpackage
