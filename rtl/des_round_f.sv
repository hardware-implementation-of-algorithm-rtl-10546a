// des_round_f -- the DES round function f(R, K), the key-dependent half of
// one Feistel round.
//
// Four steps, all combinational: expansion E of the 32-bit right half to 48
// bits (16 bits duplicated), XOR with the 48-bit round key, the eight S-boxes
// (48 -> 32 bits) and the fixed permutation P. The XOR of f with the left half
// and the swap of the halves belong to the round register logic of the rolled
// core (des_decrypt_rolled), as in the rolled datapath where the second XOR
// sits below the permutation block. Tables are those of FIPS-46 (des_pkg).
// No clock; the delay is one S-box look-up plus two XOR levels.
module des_round_f
  import des_pkg::*;
(
  input  logic [31:0] r,   // right half R_i
  input  subkey_t     k,   // round key
  output logic [31:0] f    // f(R_i, K)
);

  subkey_t     e_out;   // expanded right half
  subkey_t     x1;      // expanded half XOR round key
  logic [31:0] s_out;   // S-box outputs

  assign e_out = perm_e(r);
  assign x1    = e_out ^ k;

  des_sboxes u_sboxes (.x(x1), .y(s_out));

  assign f = perm_p(s_out);

endmodule
