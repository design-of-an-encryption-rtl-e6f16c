// des_ref_pkg: software reference model of DES and 3DES-CBC for the
// testbenches. It takes the standard's constant tables from des_pkg but
// computes single DES passes the textbook way (IP, 16 rounds, swap, FP for
// every pass, key schedule per call), unlike the RTL's merged 48-round network.
// The testbenches check it against the classic DES example
// (key 133457799BBCDFF1, plaintext 0123456789ABCDEF, ciphertext 85E813540F0AB405).
package des_ref_pkg;
  import des_pkg::IP_T, des_pkg::P_T, des_pkg::PC1_T, des_pkg::PC2_T, des_pkg::SBOX_T,
         des_pkg::SHIFT2;

  // Bit t (1 = leftmost) of an n-bit word.
  function automatic logic bitn(input logic [63:0] x, input int n, input int t);
    return x[n - t];
  endfunction

  function automatic logic [63:0] des(input logic [63:0] blk, input logic [63:0] key, input bit enc);
    logic [63:0] p, o;
    logic [55:0] cd;
    logic [47:0] sk [16];
    logic [47:0] e;
    logic [31:0] l, r, f, s, nl;
    logic [5:0]  b;
    int row, col;
    for (int i = 0; i < 56; i++) cd[55-i] = bitn(key, 64, PC1_T[i]);
    for (int k = 0; k < 16; k++) begin
      for (int sh = 0; sh < (SHIFT2[k] ? 2 : 1); sh++)
        cd = {cd[54:28], cd[55], cd[26:0], cd[27]};
      for (int i = 0; i < 48; i++) sk[k][47-i] = cd[56 - PC2_T[i]];
    end
    for (int i = 0; i < 64; i++) p[63-i] = bitn(blk, 64, IP_T[i]);
    l = p[63:32];
    r = p[31:0];
    for (int k = 0; k < 16; k++) begin
      // E: 32,1,2,3,4,5, 4,5,...  (each nibble with its two neighbours)
      for (int g = 0; g < 8; g++) begin
        e[47-6*g]   = r[31 - ((4*g + 31) % 32)];
        for (int j = 1; j < 5; j++) e[47-6*g-j] = r[31 - (4*g + j - 1)];
        e[47-6*g-5] = r[31 - ((4*g + 4) % 32)];
      end
      e ^= enc ? sk[k] : sk[15-k];
      for (int g = 0; g < 8; g++) begin
        b = e[47-6*g -: 6];
        row = 2 * b[5] + b[0];
        col = b[4:1];
        s[31-4*g -: 4] = SBOX_T[g][row][63-4*col -: 4];
      end
      for (int i = 0; i < 32; i++) f[31-i] = s[32 - P_T[i]];
      nl = r;
      r = l ^ f;
      l = nl;
    end
    p = {r, l};
    for (int i = 0; i < 64; i++) o[64 - IP_T[i]] = p[63-i];
    return o;
  endfunction

  function automatic logic [63:0] tdes(input logic [63:0] x, input logic [63:0] k1,
                                       input logic [63:0] k2, input logic [63:0] k3,
                                       input bit enc);
    if (enc) return des(des(des(x, k1, 1), k2, 0), k3, 1);
    else     return des(des(des(x, k3, 0), k2, 1), k1, 0);
  endfunction

endpackage
