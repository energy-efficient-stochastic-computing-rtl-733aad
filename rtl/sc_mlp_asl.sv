// sc_mlp_asl: fully parallel stochastic-computing MLP with layer-wise adjustable sequence
// length (ASL).
//
// The network has NL weight layers between NL+1 neuron layers of SIZES (default
// 784-1024-1024-512-256-10). Values are bipolar bitstreams. The binary inputs enter through
// an SNG bank; each layer multiplies its input streams by SNG-generated weight streams (XNOR),
// counts the products with a pipelined adder tree and applies an STanh state machine; every
// neuron of a layer works in parallel, one stream bit per cycle. Layer i runs for
// L_i = 2**len_log2[i] cycles: its weight SNGs use the first L_i points of a Sobol sequence and
// it reads the first L_i bits of the previous layer's output streams, which are kept in a stream
// buffer (direct truncation without regeneration). The last layer's output streams are counted
// by probability estimators.
//
// Following the paper: the structure (SNG, XNOR, adder tree with one pipeline stage, STanh,
// Sobol RNG with counter/priority encoder/LUT/XOR), layer sizes, L = 1024, lengths as powers of
// two, and sum(L_i) + 5 cycles per inference. This design's choices: weights and inputs held in
// registers as W-bit SNG values, the load ports, the bias SNG, the STanh state count, the stream
// buffers, and what happens when a layer is longer than the one before it (its input address
// wraps, so it re-reads the shorter stream).
//
// Interface: load weights (wl_*) and inputs (xl_*) while idle, set len_log2, pulse start.
// busy is high for sum(L_i) + NL cycles, then done pulses and out_count[k] holds the number of
// ones in output k's stream of L_{NL-1} bits (bipolar value 2*count/L - 1).
module sc_mlp_asl
  import asl_pkg::*;
#(
  parameter int unsigned NL            = asl_pkg::NUM_LAYERS,
  parameter int unsigned SIZES [NL+1]  = '{784, 1024, 1024, 512, 256, 10},
  parameter int unsigned LOG2          = asl_pkg::LOG2L,
  parameter int unsigned W             = asl_pkg::VW,
  parameter int unsigned PARTS         = 4,
  localparam int unsigned LW           = (NL > 1) ? $clog2(NL) : 1,
  localparam int unsigned RW           = $clog2(max_size(SIZES) + 1),
  localparam int unsigned NOUT         = SIZES[NL]
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration and control
  input  len_log2_t        len_log2 [NL],
  input  logic             start,
  output logic             busy,
  output logic             done,
  // weight load port (col = SIZES[layer] selects the bias)
  input  logic             wl_we,
  input  logic [LW-1:0]    wl_layer,
  input  logic [RW-1:0]    wl_row,
  input  logic [RW-1:0]    wl_col,
  input  logic [W-1:0]     wl_data,
  // input load port
  input  logic             xl_we,
  input  logic [RW-1:0]    xl_addr,
  input  logic [W-1:0]     xl_data,
  // results and status
  output logic [LOG2:0]    out_count [NOUT],
  output logic [NL-1:0]    act_saturated   // per layer: an STanh state hit its end this cycle
);
  function automatic int unsigned max_size(input int unsigned s [NL+1]);
    int unsigned mx = 0;
    for (int i = 0; i <= NL; i++) if (s[i] > mx) mx = s[i];
    return mx;
  endfunction

  logic            clr;
  logic [NL-1:0]   run;
  logic [LW-1:0]   layer;
  logic [LOG2-1:0] t;
  len_log2_t       len_cur, len_prev;
  logic [LOG2-1:0] raddr;
  // Read data of the stream buffers, layer l's buffer in bits [SIZES[l+1]-1:0] of row l.
  logic [max_size(SIZES)-1:0] stream_rd [NL];

  asl_controller #(.NL(NL), .LOG2(LOG2)) u_ctl (
    .clk, .rst_n, .start, .len_log2, .clr, .run, .layer, .t, .len_cur, .len_prev, .busy, .done
  );

  // Direct truncation of the previous layer's streams: read the first L_i bits; if this layer
  // is longer than the previous one, wrap inside the previous layer's L_{i-1} bits.
  assign raddr = t & LOG2'((32'd1 << len_prev) - 1);

  for (genvar l = 0; l < NL; l++) begin : g_layer
    localparam int unsigned N = SIZES[l];
    localparam int unsigned M = SIZES[l+1];

    logic [N-1:0]    x_bits;
    logic            y_valid, sat;
    logic [M-1:0]    y_bits;
    logic [LOG2-1:0] y_idx;

    if (l == 0) begin : g_in
      input_sng_bank #(.N(N), .W(W), .DIM(0)) u_in (
        .clk, .rst_n, .clr, .run(run[0]), .x_bits,
        .xl_we, .xl_addr(xl_addr[$clog2(N)-1:0]), .xl_data
      );
    end else begin : g_in
      assign x_bits = stream_rd[l-1][N-1:0];
    end

    sc_layer #(.N(N), .M(M), .W(W), .PARTS(PARTS), .DIM(1), .IDXW(LOG2)) u_layer (
      .clk, .rst_n, .clr, .run(run[l]), .x_bits, .t_in(t),
      .y_valid, .y_bits, .y_idx, .saturated(sat),
      .wl_we(wl_we && (wl_layer == LW'(l))),
      .wl_row(wl_row[$clog2(M)-1:0]), .wl_col(wl_col[$clog2(N+1)-1:0]), .wl_data
    );
    assign act_saturated[l] = sat;

    if (l < NL - 1) begin : g_out
      stream_buffer #(.M(M), .DEPTH(1 << LOG2)) u_buf (
        .clk, .we(y_valid), .waddr(y_idx), .wdata(y_bits), .raddr, .rdata(stream_rd[l][M-1:0])
      );
      if (M < max_size(SIZES)) begin : g_pad
        assign stream_rd[l][max_size(SIZES)-1:M] = '0;
      end
    end else begin : g_out
      assign stream_rd[l] = '0;
      for (genvar k = 0; k < M; k++) begin : g_pe
        prob_estimator #(.CW(LOG2 + 1)) u_pe (
          .clk, .rst_n, .clr, .en(y_valid), .bit_i(y_bits[k]), .count(out_count[k])
        );
      end
    end
  end
endmodule
