// sng: comparator of a stochastic number generator.
//
// Follows the SNG drawing of the paper: the binary value A is compared with the random number
// B and the output bit is A > B. With B uniform over 0..2**W-1 the stream has a fraction
// A / 2**W of ones. Purely combinational.
module sng #(
  parameter int unsigned W = asl_pkg::VW
) (
  input  logic [W-1:0] value,  // A: binary value for the probability
  input  logic [W-1:0] rnd,    // B: random number
  output logic         bit_o   // A > B
);
  assign bit_o = value > rnd;
endmodule
