// asl_pkg: constants, types and helper functions shared by the stochastic-computing
// (SC) MLP with layer-wise adjustable sequence length (ASL).
//
// The default network is the 6-layer MLP 784-1024-1024-512-256-10 (five weight layers) with a
// full sequence length of L = 1024 = 2**10, as evaluated in the paper. Bitstreams are bipolar:
// a stream whose fraction of ones is p encodes 2p-1.
//
// sobol_dir() returns Sobol direction vectors. The paper only says that the vectors V_m are
// held in a look-up table; the primitive polynomials and initial direction numbers used here are
// the standard Joe-Kuo ones for the first five dimensions (this design's choice).
package asl_pkg;

  // Number of weight layers of the default network (6 neuron layers -> 5 weight matrices).
  localparam int unsigned NUM_LAYERS = 5;
  // log2 of the full sequence length L = 1024.
  localparam int unsigned LOG2L      = 10;
  // Width of an SNG binary value / Sobol number (one quantisation step per stream bit at L).
  localparam int unsigned VW         = 10;
  // Width of a per-layer length code: the layer length is 2**len_log2.
  localparam int unsigned LENW       = 4;

  typedef logic [LENW-1:0] len_log2_t;

  // Controller states.
  typedef enum logic [1:0] {
    CTL_IDLE  = 2'd0,  // waiting for start
    CTL_RUN   = 2'd1,  // current layer consumes one stream bit per cycle
    CTL_DRAIN = 2'd2,  // one cycle for the last bit to leave the adder-tree pipeline stage
    CTL_DONE  = 2'd3   // one cycle pulse of done
  } ctl_state_t;

  // Direction vector V_k (k = 0 is the most significant direction) of Sobol dimension dim,
  // left aligned in a W-bit word. dim 0 is the van der Corput sequence.
  function automatic logic [31:0] sobol_dir(input int unsigned dim, input int unsigned k,
                                            input int unsigned W);
    int unsigned s, a;
    int unsigned m [0:31];
    logic [31:0] v;
    s = 1; a = 0;
    m[0] = 1; m[1] = 1; m[2] = 1; m[3] = 1;
    case (dim)
      0: begin s = 1; a = 0; m[0] = 1; end // handled below
      1: begin s = 1; a = 0; m[0] = 1; end
      2: begin s = 2; a = 1; m[0] = 1; m[1] = 3; end
      3: begin s = 3; a = 1; m[0] = 1; m[1] = 3; m[2] = 1; end
      default: begin s = 3; a = 2; m[0] = 1; m[1] = 1; m[2] = 1; end
    endcase
    for (int unsigned j = s; j < 32; j++) begin
      m[j] = m[j-s] ^ (m[j-s] << s);
      for (int unsigned r = 1; r < s; r++)
        if (((a >> (s - 1 - r)) & 1) != 0)
          m[j] = m[j] ^ (m[j-r] << r);
    end
    if (dim == 0) v = 32'd1;
    else          v = 32'(m[k]);
    return v << (W - 1 - k);
  endfunction

  // Integer division rounding up, used to size adder-tree groups.
  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
