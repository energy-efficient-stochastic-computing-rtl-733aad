// stream_buffer: keeps the output bitstreams of one layer for the next layer.
//
// In the ASL scheme a layer's outputs are passed on as bitstreams and truncated, not
// regenerated. Because the layers run one after another, the L_i output bits of every neuron
// are stored: word a of the memory holds bit a of all M neurons. The next layer reads word
// raddr each cycle; the caller truncates by reading only the first L_{i+1} words.
//
// Timing: synchronous write (we, waddr, wdata), combinational read.
module stream_buffer #(
  parameter int unsigned M     = 1024,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [M-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [M-1:0]  rdata
);
  logic [M-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];
endmodule
