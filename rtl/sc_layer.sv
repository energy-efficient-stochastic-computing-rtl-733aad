// sc_layer: one fully parallel SC layer with N inputs and M neurons.
//
// All M neurons work at the same time, one stream bit per cycle, as in the paper's fully
// parallel design. The layer holds its weights and biases in registers (written through a
// simple load port) and one Sobol RNG whose number is shared by every weight SNG of the layer.
// Truncating the layer to L_i = 2**k bits simply means running it for L_i cycles after a
// restart, so the weights are generated from the first L_i points of the Sobol sequence.
// The paper's full-precision model is FP16; here weights are stored already as W-bit SNG
// values, p = w / 2**W encoding the bipolar weight 2p-1 (this design's choice).
//
// Interface: clr restarts the RNG and the neurons' STanh states. In each cycle with run high
// the layer consumes x_bits (input stream bit t, index t on t_in). One cycle later y_valid is
// high, y_bits holds the output bit of every neuron and y_idx = t.
// Load port: wl_we writes wl_data to the weight (row = neuron, col = input); col = N selects
// the bias of that neuron.
module sc_layer
  import asl_pkg::*;
#(
  parameter int unsigned N     = 784,
  parameter int unsigned M     = 1024,
  parameter int unsigned W     = asl_pkg::VW,
  parameter int unsigned PARTS = 4,
  parameter int unsigned DIM   = 1,
  parameter int unsigned IDXW  = asl_pkg::LOG2L
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    run,
  input  logic [N-1:0]            x_bits,
  input  logic [IDXW-1:0]         t_in,
  output logic                    y_valid,
  output logic [M-1:0]            y_bits,
  output logic [IDXW-1:0]         y_idx,
  output logic                    saturated,     // any neuron's STanh saturated this cycle
  input  logic                    wl_we,
  input  logic [$clog2(M)-1:0]    wl_row,
  input  logic [$clog2(N+1)-1:0]  wl_col,
  input  logic [W-1:0]            wl_data
);
  localparam int unsigned CW = (N > 1) ? $clog2(N) : 1;  // column index width of w_mem

  logic [W-1:0] w_mem [M][N];
  logic [W-1:0] b_mem [M];
  logic [W-1:0] rnd;
  logic [M-1:0] nvalid, nsat;

  always_ff @(posedge clk)
    if (wl_we) begin
      if (32'(wl_col) == N) b_mem[wl_row] <= wl_data;
      else                  w_mem[wl_row][CW'(wl_col)] <= wl_data;
    end

  sobol_rng #(.W(W), .DIM(DIM)) u_rng (.clk, .rst_n, .clr, .en(run), .q(rnd));

  for (genvar j = 0; j < M; j++) begin : g_neuron
    sc_neuron #(.N(N), .W(W), .PARTS(PARTS)) u_neuron (
      .clk, .rst_n, .clr, .valid_in(run), .x_bits, .w(w_mem[j]), .b(b_mem[j]), .rnd,
      .out_valid(nvalid[j]), .out_bit(y_bits[j]), .saturated(nsat[j])
    );
  end

  assign y_valid   = nvalid[0];
  assign saturated = y_valid && (|nsat);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)   y_idx <= '0;
    else if (run) y_idx <= t_in;
endmodule
