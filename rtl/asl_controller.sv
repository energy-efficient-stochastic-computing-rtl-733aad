// asl_controller: sequences the layers with layer-wise adjustable sequence lengths.
//
// On start the configuration len_log2[i] (layer i runs L_i = 2**len_log2[i] cycles) is
// captured, all RNGs and STanh states are restarted (clr), and the layers are run one after
// another: layer i gets run high for L_i cycles with t = 0..L_i-1, then one drain cycle in
// which its last bit leaves the adder-tree pipeline stage. One inference therefore takes
// sum(L_i) + NL cycles, which is the cycle count the paper reports (for example
// 1024+512+256+256+256 + 5 = 2309). Lengths above LOG2L are clamped to LOG2L.
//
// Interface: start is sampled in CTL_IDLE; busy is high for the sum(L_i)+NL cycles of an
// inference, done pulses for one cycle after it. layer/t/len_cur/len_prev tell the datapath
// which layer runs, which bit it is on, and the current and previous layer lengths (log2).
module asl_controller
  import asl_pkg::*;
#(
  parameter int unsigned NL    = asl_pkg::NUM_LAYERS,
  parameter int unsigned LOG2  = asl_pkg::LOG2L,
  localparam int unsigned LW   = (NL > 1) ? $clog2(NL) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  len_log2_t           len_log2 [NL],
  output logic                clr,
  output logic [NL-1:0]       run,
  output logic [LW-1:0]       layer,
  output logic [LOG2-1:0]     t,
  output len_log2_t           len_cur,
  output len_log2_t           len_prev,
  output logic                busy,
  output logic                done
);
  ctl_state_t state;
  len_log2_t  cfg [NL];
  logic       last_bit;

  assign len_cur  = cfg[layer];
  assign len_prev = (layer == '0) ? cfg[0] : cfg[layer - 1'b1];
  assign last_bit = (32'(t) == (32'd1 << len_cur) - 1);
  assign clr      = (state == CTL_IDLE) && start;
  assign busy     = (state == CTL_RUN) || (state == CTL_DRAIN);
  assign done     = (state == CTL_DONE);

  always_comb begin
    run = '0;
    if (state == CTL_RUN) run[layer] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= CTL_IDLE;
      layer <= '0;
      t     <= '0;
      for (int i = 0; i < NL; i++) cfg[i] <= len_log2_t'(LOG2);
    end else begin
      case (state)
        CTL_IDLE:
          if (start) begin
            for (int i = 0; i < NL; i++)
              cfg[i] <= (32'(len_log2[i]) > LOG2) ? len_log2_t'(LOG2) : len_log2[i];
            layer <= '0;
            t     <= '0;
            state <= CTL_RUN;
          end
        CTL_RUN:
          if (last_bit) state <= CTL_DRAIN;
          else          t     <= t + 1'b1;
        CTL_DRAIN: begin
          t <= '0;
          if (32'(layer) == NL - 1) state <= CTL_DONE;
          else begin
            layer <= layer + 1'b1;
            state <= CTL_RUN;
          end
        end
        default: state <= CTL_IDLE;
      endcase
    end

  // The controller never leaves a layer before its last bit and never runs two layers at once.
  a_onehot_run: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(run));
  a_t_range:    assert property (@(posedge clk) disable iff (!rst_n)
                                 state == CTL_RUN |-> 32'(t) < (32'd1 << len_cur));
endmodule
