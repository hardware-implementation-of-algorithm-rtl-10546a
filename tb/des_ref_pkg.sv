// des_ref_pkg -- a software model of DES for the testbenches, written
// independently of the RTL: bits are held in 1-based arrays numbered as in the
// standard (bit 1 first), tables are indexed by DES bit number, and the key
// schedule keeps the sixteen round keys in an array. Only known-answer vectors
// and this model decide what the RTL is expected to produce.
package des_ref_pkg;

  localparam int IPT [1:64] = '{
    58,50,42,34,26,18,10, 2,60,52,44,36,28,20,12, 4,
    62,54,46,38,30,22,14, 6,64,56,48,40,32,24,16, 8,
    57,49,41,33,25,17, 9, 1,59,51,43,35,27,19,11, 3,
    61,53,45,37,29,21,13, 5,63,55,47,39,31,23,15, 7};
  localparam int FPT [1:64] = '{
    40, 8,48,16,56,24,64,32,39, 7,47,15,55,23,63,31,
    38, 6,46,14,54,22,62,30,37, 5,45,13,53,21,61,29,
    36, 4,44,12,52,20,60,28,35, 3,43,11,51,19,59,27,
    34, 2,42,10,50,18,58,26,33, 1,41, 9,49,17,57,25};
  localparam int ET [1:48] = '{
    32, 1, 2, 3, 4, 5, 4, 5, 6, 7, 8, 9,
     8, 9,10,11,12,13,12,13,14,15,16,17,
    16,17,18,19,20,21,20,21,22,23,24,25,
    24,25,26,27,28,29,28,29,30,31,32, 1};
  localparam int PT [1:32] = '{
    16, 7,20,21,29,12,28,17, 1,15,23,26, 5,18,31,10,
     2, 8,24,14,32,27, 3, 9,19,13,30, 6,22,11, 4,25};
  localparam int PC1T [1:56] = '{
    57,49,41,33,25,17, 9, 1,58,50,42,34,26,18,
    10, 2,59,51,43,35,27,19,11, 3,60,52,44,36,
    63,55,47,39,31,23,15, 7,62,54,46,38,30,22,
    14, 6,61,53,45,37,29,21,13, 5,28,20,12, 4};
  localparam int PC2T [1:48] = '{
    14,17,11,24, 1, 5, 3,28,15, 6,21,10,
    23,19,12, 4,26, 8,16, 7,27,20,13, 2,
    41,52,31,37,47,55,30,40,51,45,33,48,
    44,49,39,56,34,53,46,42,50,36,29,32};
  localparam int SHIFTS [1:16] = '{1,1,2,2,2,2,2,2,1,2,2,2,2,2,2,1};
  localparam int S1 [1:64] = '{
    14, 4,13, 1, 2,15,11, 8, 3,10, 6,12, 5, 9, 0, 7,
     0,15, 7, 4,14, 2,13, 1,10, 6,12,11, 9, 5, 3, 8,
     4, 1,14, 8,13, 6, 2,11,15,12, 9, 7, 3,10, 5, 0,
    15,12, 8, 2, 4, 9, 1, 7, 5,11, 3,14,10, 0, 6,13};
  localparam int S2 [1:64] = '{
    15, 1, 8,14, 6,11, 3, 4, 9, 7, 2,13,12, 0, 5,10,
     3,13, 4, 7,15, 2, 8,14,12, 0, 1,10, 6, 9,11, 5,
     0,14, 7,11,10, 4,13, 1, 5, 8,12, 6, 9, 3, 2,15,
    13, 8,10, 1, 3,15, 4, 2,11, 6, 7,12, 0, 5,14, 9};
  localparam int S3 [1:64] = '{
    10, 0, 9,14, 6, 3,15, 5, 1,13,12, 7,11, 4, 2, 8,
    13, 7, 0, 9, 3, 4, 6,10, 2, 8, 5,14,12,11,15, 1,
    13, 6, 4, 9, 8,15, 3, 0,11, 1, 2,12, 5,10,14, 7,
     1,10,13, 0, 6, 9, 8, 7, 4,15,14, 3,11, 5, 2,12};
  localparam int S4 [1:64] = '{
     7,13,14, 3, 0, 6, 9,10, 1, 2, 8, 5,11,12, 4,15,
    13, 8,11, 5, 6,15, 0, 3, 4, 7, 2,12, 1,10,14, 9,
    10, 6, 9, 0,12,11, 7,13,15, 1, 3,14, 5, 2, 8, 4,
     3,15, 0, 6,10, 1,13, 8, 9, 4, 5,11,12, 7, 2,14};
  localparam int S5 [1:64] = '{
     2,12, 4, 1, 7,10,11, 6, 8, 5, 3,15,13, 0,14, 9,
    14,11, 2,12, 4, 7,13, 1, 5, 0,15,10, 3, 9, 8, 6,
     4, 2, 1,11,10,13, 7, 8,15, 9,12, 5, 6, 3, 0,14,
    11, 8,12, 7, 1,14, 2,13, 6,15, 0, 9,10, 4, 5, 3};
  localparam int S6 [1:64] = '{
    12, 1,10,15, 9, 2, 6, 8, 0,13, 3, 4,14, 7, 5,11,
    10,15, 4, 2, 7,12, 9, 5, 6, 1,13,14, 0,11, 3, 8,
     9,14,15, 5, 2, 8,12, 3, 7, 0, 4,10, 1,13,11, 6,
     4, 3, 2,12, 9, 5,15,10,11,14, 1, 7, 6, 0, 8,13};
  localparam int S7 [1:64] = '{
     4,11, 2,14,15, 0, 8,13, 3,12, 9, 7, 5,10, 6, 1,
    13, 0,11, 7, 4, 9, 1,10,14, 3, 5,12, 2,15, 8, 6,
     1, 4,11,13,12, 3, 7,14,10,15, 6, 8, 0, 5, 9, 2,
     6,11,13, 8, 1, 4,10, 7, 9, 5, 0,15,14, 2, 3,12};
  localparam int S8 [1:64] = '{
    13, 2, 8, 4, 6,15,11, 1,10, 9, 3,14, 5, 0,12, 7,
     1,15,13, 8,10, 3, 7, 4,12, 5, 6,11, 0,14, 9, 2,
     7,11, 4, 1, 9,12,14, 2, 0, 6,10,13,15, 3, 5, 8,
     2, 1,14, 7, 4,10, 8,13,15,12, 9, 0, 3, 5, 6,11};

  // One S-box: six input bits b[1..6] -> 4-bit value.
  function automatic int sbox(input int box, input int v6);
    int row, col, idx;
    row = ((v6 >> 4) & 2) | (v6 & 1);
    col = (v6 >> 1) & 15;
    idx = row * 16 + col + 1;
    case (box)
      1: return S1[idx];  2: return S2[idx];  3: return S3[idx];  4: return S4[idx];
      5: return S5[idx];  6: return S6[idx];  7: return S7[idx];  default: return S8[idx];
    endcase
  endfunction

  function automatic logic [31:0] ref_sboxes(input logic [47:0] x);
    logic [31:0] y;
    for (int s = 1; s <= 8; s++) begin
      int v6;
      v6 = int'((x >> (48 - 6*s)) & 48'h3f);
      y = (y << 4) | 32'(sbox(s, v6));
    end
    return y;
  endfunction

  function automatic logic [31:0] ref_f(input logic [31:0] r, input logic [47:0] k);
    logic [47:0] e;
    logic [31:0] s, p;
    for (int i = 1; i <= 48; i++) e[48-i] = r[32-ET[i]];
    s = ref_sboxes(e ^ k);
    for (int i = 1; i <= 32; i++) p[32-i] = s[32-PT[i]];
    return p;
  endfunction

  // 56-bit search key -> 64-bit DES key, zero parity bit closing each byte.
  function automatic logic [63:0] ref_key64(input logic [55:0] k);
    logic [63:0] y;
    y = '0;
    for (int i = 0; i < 8; i++) y = (y << 8) | 64'({k[55-7*i -: 7], 1'b0});
    return y;
  endfunction

  // Round key n (1..16) of a 64-bit DES key.
  function automatic logic [47:0] ref_subkey(input logic [63:0] key, input int n);
    bit c [1:28];
    bit d [1:28];
    bit t;
    logic [47:0] k;
    for (int i = 1; i <= 28; i++) begin
      c[i] = key[64-PC1T[i]];
      d[i] = key[64-PC1T[i+28]];
    end
    for (int r = 1; r <= n; r++)
      for (int s = 0; s < SHIFTS[r]; s++) begin
        t = c[1]; for (int i = 1; i < 28; i++) c[i] = c[i+1]; c[28] = t;
        t = d[1]; for (int i = 1; i < 28; i++) d[i] = d[i+1]; d[28] = t;
      end
    for (int i = 1; i <= 48; i++)
      k[48-i] = (PC2T[i] <= 28) ? c[PC2T[i]] : d[PC2T[i]-28];
    return k;
  endfunction

  function automatic logic [63:0] ref_des(input logic [63:0] blk, input logic [63:0] key,
                                          input bit decrypt);
    logic [63:0] x, y;
    logic [31:0] l, r, t;
    for (int i = 1; i <= 64; i++) x[64-i] = blk[64-IPT[i]];
    l = x[63:32];
    r = x[31:0];
    for (int rnd = 1; rnd <= 16; rnd++) begin
      t = r;
      r = l ^ ref_f(r, ref_subkey(key, decrypt ? 17 - rnd : rnd));
      l = t;
    end
    x = {r, l};
    for (int i = 1; i <= 64; i++) y[64-i] = x[64-FPT[i]];
    return y;
  endfunction

endpackage
