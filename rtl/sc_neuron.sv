// sc_neuron: one SC neuron, i.e. one layer-propagation unit of the paper's layer figure.
//
// Each of the N weights goes through its own SNG comparator against the layer's shared Sobol
// number (the same w > rnd compare as the sng module, written here as a loop so that a
// full-size network of 2.4 million comparators stays light to elaborate), and the resulting weight bit is multiplied with the matching input bit by an XNOR
// gate (bipolar multiplication). The bias is one more SNG whose bit enters the sum unmultiplied
// (bias times +1); the paper's layer equation y = f(Wx + b) has a bias but the paper does not
// say how it is generated, so this is this design's choice. The N+1 product bits are counted by
// the pipelined adder tree and the count drives the STanh state machine.
//
// Timing: bits presented with valid_in in cycle t give out_bit with out_valid in cycle t+1
// (one cycle for the adder-tree pipeline stage; the STanh output is taken from its next state).
// clr restarts the STanh state.
module sc_neuron
  import asl_pkg::*;
#(
  parameter int unsigned N     = 784,
  parameter int unsigned W     = asl_pkg::VW,
  parameter int unsigned PARTS = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         valid_in,
  input  logic [N-1:0] x_bits,       // input stream bits of this cycle
  input  logic [W-1:0] w   [N],      // weights, as SNG binary values (p = w / 2**W)
  input  logic [W-1:0] b,            // bias, as SNG binary value
  input  logic [W-1:0] rnd,          // shared Sobol number of this cycle
  output logic         out_valid,
  output logic         out_bit,
  output logic         saturated
);
  localparam int unsigned SW = $clog2(N + 2);

  logic [N-1:0]  w_bits;
  logic [N:0]    prod;
  logic          b_bit;
  logic          tree_valid;
  logic [SW-1:0] tree_sum;

  // Weight SNG comparators (value > random, as in the sng module), written as a loop.
  always_comb
    for (int unsigned j = 0; j < N; j++) w_bits[j] = w[j] > rnd;
  sng #(.W(W)) u_bsng (.value(b), .rnd(rnd), .bit_o(b_bit));

  // XNOR multipliers, bias bit on top.
  assign prod = {b_bit, x_bits ~^ w_bits};

  adder_tree #(.N(N + 1), .PARTS(PARTS)) u_tree (
    .clk, .rst_n, .valid_in, .bits(prod), .valid_out(tree_valid), .sum(tree_sum)
  );

  stanh_lfsm #(.NIN(N + 1)) u_act (
    .clk, .rst_n, .clr, .en(tree_valid), .sum(tree_sum), .out_bit, .saturated
  );

  assign out_valid = tree_valid;
endmodule
