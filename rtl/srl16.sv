// srl16 -- addressable shift register in the style of the FPGA "SRL16"
// look-up-table mode, used to reverse the order of the DES round keys.
//
// When ce is high, d enters tap 0 and every word moves one tap further; the
// word at tap DEPTH-1 is dropped. q shows tap addr combinationally. After the
// key schedule has shifted in Key1..Key16, tap 0 holds Key16 and tap 15 holds
// Key1, so reading taps 0, 1, ..., 15 yields the round keys in the reverse
// order that decryption needs. Like the FPGA primitive it has no reset; a tap
// is defined once it has been written. WIDTH copies of a 16-bit shift
// register, one per bit of the key word.
module srl16 #(
  parameter int unsigned WIDTH = 48,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     ce,
  input  logic [WIDTH-1:0]         d,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic [WIDTH-1:0]         q
);

  logic [WIDTH-1:0] taps [DEPTH];

  always_ff @(posedge clk) begin
    if (ce) begin
      taps[0] <= d;
      for (int i = 1; i < DEPTH; i++) taps[i] <= taps[i-1];
    end
  end

  assign q = taps[addr];

endmodule
