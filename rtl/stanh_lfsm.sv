// stanh_lfsm: stochastic tanh (STanh) activation built as a linear finite state machine.
//
// The paper uses an LFSM-based STanh after the adder tree but gives no state count or update
// rule. This design uses the counter-input form: the state is a saturating up/down counter
// over 2**STW states that moves, each cycle, by the bipolar value of the adder-tree count,
// 2*sum - NIN (NIN bipolar product bits, each +1 for a one and -1 for a zero). The output bit
// is 1 while the new state lies in the upper half. A positive mean input drives the state to
// the top and the output towards all ones, a negative one to all zeros, and inputs near zero
// give a tanh-shaped transition; this is the usual saturating-counter STanh. STW is this
// design's choice (default: one bit more than the count, i.e. about 2*NIN states).
//
// Timing: clr (synchronous) puts the state in the middle (2**(STW-1)). In a cycle with en
// high, out_bit is the activation bit computed from the next state (combinational), and the
// state register takes that next state at the clock edge. The state register is the extra
// sequential stage the paper mentions.
module stanh_lfsm #(
  parameter int unsigned NIN = 1025,
  localparam int unsigned SW = $clog2(NIN + 1),
  parameter int unsigned STW = SW + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic [SW-1:0] sum,
  output logic          out_bit,
  output logic          saturated   // next state would have left the range (for monitoring)
);
  localparam int signed SMAX = (1 << STW) - 1;
  localparam int signed MID  = 1 << (STW - 1);

  logic [STW-1:0] state, state_nx;
  int signed      t;

  always_comb begin
    t         = int'(state) + 2 * int'(sum) - int'(NIN);
    saturated = 1'b0;
    if (t > SMAX) begin
      t = SMAX; saturated = 1'b1;
    end else if (t < 0) begin
      t = 0;    saturated = 1'b1;
    end
    state_nx = STW'(t);
    out_bit  = state_nx[STW-1];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)   state <= STW'(MID);
    else if (clr) state <= STW'(MID);
    else if (en)  state <= state_nx;
endmodule
