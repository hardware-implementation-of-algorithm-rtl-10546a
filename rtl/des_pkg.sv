// des_pkg -- constants, tables and bit permutations of the Data Encryption
// Standard (FIPS-46) shared by the key-search datapath.
//
// Bit numbering: a vector [N-1:0] holds DES bits 1..N with DES bit 1 in the
// most significant position, so DES bit b sits at index N-b. Every table
// below lists, for output bit 1, 2, ..., the DES input bit it is taken from,
// exactly as printed in the standard. The permutations are pure wiring once
// synthesized; they are written as functions so that the round, the key
// schedule and the testbench-independent reference agree on one numbering.
//
// The search key is 56 bits wide. key56_to_key64 widens it to a 64-bit DES
// key by putting a 0 in the parity bit (least significant bit) of every byte,
// so the seven key bits of each byte are the 56-bit key's bits in order. PC1
// then discards the parity bits again. This mapping reproduces the example
// keys of the published simulation results (key 1 and key f0000000000011).
package des_pkg;

  localparam int unsigned BLOCK_W  = 64;   // DES block width
  localparam int unsigned KEY_W    = 56;   // effective DES key width
  localparam int unsigned SUBKEY_W = 48;   // round key width
  localparam int unsigned ROUNDS   = 16;   // Feistel rounds
  // Cycles one rolled engine spends on a key: 1 start + 16 rounds + 1 output.
  localparam int unsigned CYCLES_PER_KEY = ROUNDS + 2;

  typedef logic [BLOCK_W-1:0]  block_t;
  typedef logic [KEY_W-1:0]    key_t;
  typedef logic [SUBKEY_W-1:0] subkey_t;
  typedef logic [27:0]         half_key_t;   // C or D half of the key schedule

  typedef byte unsigned tab64_t [64];
  typedef byte unsigned tab56_t [56];
  typedef byte unsigned tab48_t [48];
  typedef byte unsigned tab32_t [32];

  localparam tab64_t IP_T = '{
    58,50,42,34,26,18,10, 2, 60,52,44,36,28,20,12, 4,
    62,54,46,38,30,22,14, 6, 64,56,48,40,32,24,16, 8,
    57,49,41,33,25,17, 9, 1, 59,51,43,35,27,19,11, 3,
    61,53,45,37,29,21,13, 5, 63,55,47,39,31,23,15, 7};

  localparam tab64_t FP_T = '{      // IP^-1
    40, 8,48,16,56,24,64,32, 39, 7,47,15,55,23,63,31,
    38, 6,46,14,54,22,62,30, 37, 5,45,13,53,21,61,29,
    36, 4,44,12,52,20,60,28, 35, 3,43,11,51,19,59,27,
    34, 2,42,10,50,18,58,26, 33, 1,41, 9,49,17,57,25};

  localparam tab48_t E_T = '{
    32, 1, 2, 3, 4, 5,  4, 5, 6, 7, 8, 9,  8, 9,10,11,12,13, 12,13,14,15,16,17,
    16,17,18,19,20,21, 20,21,22,23,24,25, 24,25,26,27,28,29, 28,29,30,31,32, 1};

  localparam tab32_t P_T = '{
    16, 7,20,21,29,12,28,17,  1,15,23,26, 5,18,31,10,
     2, 8,24,14,32,27, 3, 9, 19,13,30, 6,22,11, 4,25};

  localparam tab56_t PC1_T = '{
    57,49,41,33,25,17, 9,  1,58,50,42,34,26,18, 10, 2,59,51,43,35,27,
    19,11, 3,60,52,44,36, 63,55,47,39,31,23,15,  7,62,54,46,38,30,22,
    14, 6,61,53,45,37,29, 21,13, 5,28,20,12, 4};

  localparam tab48_t PC2_T = '{
    14,17,11,24, 1, 5,  3,28,15, 6,21,10, 23,19,12, 4,26, 8, 16, 7,27,20,13, 2,
    41,52,31,37,47,55, 30,40,51,45,33,48, 44,49,39,56,34,53, 46,42,50,36,29,32};

  // Left rotation of C and D before round i (1-based): 1 for rounds 1, 2, 9, 16.
  function automatic int unsigned key_shift(input int unsigned round);
    return (round == 1 || round == 2 || round == 9 || round == 16) ? 1 : 2;
  endfunction

  function automatic block_t perm_ip(input block_t x);
    block_t y;
    for (int i = 0; i < 64; i++) y[63-i] = x[64-IP_T[i]];
    return y;
  endfunction

  function automatic block_t perm_fp(input block_t x);
    block_t y;
    for (int i = 0; i < 64; i++) y[63-i] = x[64-FP_T[i]];
    return y;
  endfunction

  function automatic subkey_t perm_e(input logic [31:0] x);
    subkey_t y;
    for (int i = 0; i < 48; i++) y[47-i] = x[32-E_T[i]];
    return y;
  endfunction

  function automatic logic [31:0] perm_p(input logic [31:0] x);
    logic [31:0] y;
    for (int i = 0; i < 32; i++) y[31-i] = x[32-P_T[i]];
    return y;
  endfunction

  // PC1 of the 64-bit key: {C0, D0}.
  function automatic logic [55:0] perm_pc1(input logic [63:0] k);
    logic [55:0] y;
    for (int i = 0; i < 56; i++) y[55-i] = k[64-PC1_T[i]];
    return y;
  endfunction

  // PC2 of {C, D}: the 48-bit round key.
  function automatic subkey_t perm_pc2(input logic [55:0] cd);
    subkey_t y;
    for (int i = 0; i < 48; i++) y[47-i] = cd[56-PC2_T[i]];
    return y;
  endfunction

  function automatic logic [63:0] key56_to_key64(input key_t k);
    logic [63:0] y;
    for (int b = 0; b < 8; b++) y[8*b +: 8] = {k[7*b +: 7], 1'b0};
    return y;
  endfunction

  function automatic half_key_t rotl28(input half_key_t x, input int unsigned n);
    return (n == 1) ? {x[26:0], x[27]} : {x[25:0], x[27:26]};
  endfunction

endpackage
