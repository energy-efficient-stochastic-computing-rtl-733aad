// adder_tree: counts the ones among N product bits of one neuron, with one pipeline stage.
//
// The N inputs are split into PARTS groups. Each group is reduced to a binary count by the
// input-side levels of the tree; these PARTS counts are registered (the pipeline stage) and
// the output-side levels add them in the next cycle. Placing the stage near the output, where
// the tree carries few (wider) signals, needs fewer flip-flops than a stage near the inputs,
// which is the paper's argument for it. How many levels lie after the stage is not given in
// the paper; PARTS (default 4, i.e. two adder levels after the stage) is this design's choice.
//
// Timing: sum/valid_out appear one cycle after bits/valid_in. The register only loads when
// valid_in is high.
module adder_tree #(
  parameter int unsigned N     = 1024,
  parameter int unsigned PARTS = 4,
  localparam int unsigned SW   = $clog2(N + 1),
  localparam int unsigned G    = asl_pkg::ceil_div(N, PARTS),  // inputs per group
  localparam int unsigned GW   = $clog2(G + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid_in,
  input  logic [N-1:0]  bits,
  output logic          valid_out,
  output logic [SW-1:0] sum
);
  logic [GW-1:0] part_d [PARTS];
  logic [GW-1:0] part_q [PARTS];

  // Input-side levels: one count per group.
  always_comb
    for (int unsigned p = 0; p < PARTS; p++) begin
      part_d[p] = '0;
      for (int unsigned j = 0; j < G; j++)
        if (p * G + j < N) part_d[p] = part_d[p] + GW'(bits[p*G+j]);
    end

  // Pipeline stage.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      valid_out <= 1'b0;
      for (int unsigned p = 0; p < PARTS; p++) part_q[p] <= '0;
    end else begin
      valid_out <= valid_in;
      if (valid_in)
        for (int unsigned p = 0; p < PARTS; p++) part_q[p] <= part_d[p];
    end

  // Output-side levels.
  always_comb begin
    sum = '0;
    for (int unsigned p = 0; p < PARTS; p++) sum = sum + SW'(part_q[p]);
  end
endmodule
