// prob_estimator: probability estimator (PE) converting a bitstream back to binary.
//
// An up counter, as in the paper's PE drawing: it counts the ones of the stream while en is
// high. After L bits, count / L is the fraction of ones p and the bipolar value is 2p - 1.
// clr (synchronous) zeroes the count; count is registered.
module prob_estimator #(
  parameter int unsigned CW = asl_pkg::LOG2L + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic          bit_i,
  output logic [CW-1:0] count
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)             count <= '0;
    else if (clr)           count <= '0;
    else if (en && bit_i)   count <= count + 1'b1;
endmodule
