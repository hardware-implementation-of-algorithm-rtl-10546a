// des_compare -- the per-engine compare stage of the key search: flags a
// decrypted block that equals the known plaintext.
//
// match is registered: it is a one-cycle pulse in the cycle after one in which
// valid is high and dec == known. A 64-bit equality (XOR and AND-reduce) and
// one flip-flop; synchronous active-high reset.
module des_compare
  import des_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   valid,
  input  block_t dec,
  input  block_t known,
  output logic   match
);

  always_ff @(posedge clk) begin
    if (rst) match <= 1'b0;
    else     match <= valid && (dec == known);
  end

endmodule
