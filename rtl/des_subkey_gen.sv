// des_subkey_gen -- iterative DES key schedule producing one round key per
// clock, Key1 first.
//
// load: C0,D0 <= PC1(key) (the 56-bit key is widened to 64 bits with zero
// parity bits first, see des_pkg). step: C,D are rotated left by the amount of
// the next round (1 for rounds 1, 2, 9 and 16, 2 otherwise) and, in the same
// cycle, subkey shows PC2 of the rotated halves, i.e. Key_i for round i. The
// caller captures subkey on the cycle it asserts step; 16 steps after a load
// give Key1..Key16, and last is high during the 16th. The schedule follows
// FIPS-46; reusing a single rotate stage for all sixteen rounds, instead of
// sixteen chained stages, is this design's choice for the rolled engine.
// A load takes priority over a step. Only the round counter is reset.
module des_subkey_gen
  import des_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  logic    load,
  input  key_t    key,
  input  logic    step,
  output subkey_t subkey,
  output logic    last
);

  half_key_t   c_q, d_q;     // C_{i-1}, D_{i-1}
  half_key_t   c_n, d_n;     // C_i, D_i
  logic [4:0]  round_q;      // number of steps taken since the load (0..16)
  int unsigned sh;

  always_comb begin
    sh     = key_shift(int'(round_q) + 1);
    c_n    = rotl28(c_q, sh);
    d_n    = rotl28(d_q, sh);
    subkey = perm_pc2({c_n, d_n});
    last   = (round_q == 5'd15);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      round_q <= '0;
    end else if (load) begin
      {c_q, d_q} <= perm_pc1(key56_to_key64(key));
      round_q    <= '0;
    end else if (step) begin
      c_q     <= c_n;
      d_q     <= d_n;
      round_q <= round_q + 5'd1;
    end
  end

  // The schedule has exactly sixteen rounds per load.
  assert property (@(posedge clk) disable iff (rst) step && !load |-> round_q < 5'd16)
    else $error("des_subkey_gen: more than 16 steps after a load");

endmodule
