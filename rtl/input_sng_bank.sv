// input_sng_bank: turns the N binary network inputs into the first layer's input bitstreams.
//
// The inputs are held in W-bit registers (written through a load port, one per cycle) and each
// drives an SNG comparator against a Sobol number of its own dimension (DIM, default 0),
// different from the dimension used by the weight SNGs so that inputs and weights stay
// uncorrelated. Inputs use the bipolar code of the rest of the design: value v in [-1, 1] is
// stored as round((v + 1) / 2 * 2**W).
//
// Timing: clr restarts the RNG; in each cycle with run high x_bits holds stream bit t of every
// input, t counting run cycles since clr.
module input_sng_bank
  import asl_pkg::*;
#(
  parameter int unsigned N   = 784,
  parameter int unsigned W   = asl_pkg::VW,
  parameter int unsigned DIM = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   run,
  output logic [N-1:0]           x_bits,
  input  logic                   xl_we,
  input  logic [$clog2(N)-1:0]   xl_addr,
  input  logic [W-1:0]           xl_data
);
  logic [W-1:0] x_mem [N];
  logic [W-1:0] rnd;

  always_ff @(posedge clk)
    if (xl_we) x_mem[xl_addr] <= xl_data;

  sobol_rng #(.W(W), .DIM(DIM)) u_rng (.clk, .rst_n, .clr, .en(run), .q(rnd));

  for (genvar j = 0; j < N; j++) begin : g_sng
    sng #(.W(W)) u_sng (.value(x_mem[j]), .rnd(rnd), .bit_o(x_bits[j]));
  end
endmodule
