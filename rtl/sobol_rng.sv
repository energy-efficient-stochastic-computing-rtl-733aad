// sobol_rng: Sobol quasi-random number generator of one dimension.
//
// Structure as in the paper's RNG figure: a counter produces the index i, a priority encoder
// turns i into m, the position of the lowest zero bit of i, m addresses a look-up table of
// direction vectors V_m, and the new number is q_i = q_{i-1} XOR V_m, with q_{i-1} held in a
// register. The LUT contents are computed at elaboration from asl_pkg::sobol_dir (standard
// Joe-Kuo direction numbers; the paper does not list them).
//
// Interface/timing: clr (synchronous) restarts the sequence, so q = 0 is the number of index 0
// in the next cycle. Each cycle with en high advances one index; q is the registered output,
// so q holds x_t in the t-th enabled cycle after clr. Restarting after 2**k steps gives the
// first 2**k points, i.e. the truncated Sobol sequence that ASL relies on.
module sobol_rng
  import asl_pkg::*;
#(
  parameter int unsigned W   = asl_pkg::VW,  // number width (10 for L = 1024)
  parameter int unsigned DIM = 1             // Sobol dimension, 0..4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  output logic [W-1:0] q
);
  logic [W-1:0]         idx;      // counter: index i
  logic [$clog2(W)-1:0] m;        // priority encoder output
  logic [W-1:0]         lut [W];  // direction vectors V_0..V_{W-1}

  // LUT of direction vectors, fixed at elaboration.
  for (genvar k = 0; k < W; k++) begin : g_lut
    localparam logic [W-1:0] V = W'(sobol_dir(DIM, k, W));
    assign lut[k] = V;
  end

  // Priority encoder: position of the least significant zero of the index.
  always_comb begin
    m = '0;
    for (int k = W - 1; k >= 0; k--)
      if (!idx[k]) m = k[$clog2(W)-1:0];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      idx <= '0;
      q   <= '0;
    end else if (clr) begin
      idx <= '0;
      q   <= '0;
    end else if (en) begin
      idx <= idx + 1'b1;
      q   <= q ^ lut[m];
    end
endmodule
