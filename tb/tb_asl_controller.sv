// tb_asl_controller: runs the controller with the paper's coarse configuration
// [2^10, 2^9, 2^8, 2^8, 2^8] and fine Fashion-MNIST configuration [2^10, 2^9, 2^7, 2^6, 2^6],
// a short increasing/decreasing one and one with an out-of-range code (clamped to 2^10).
// For each it checks the busy cycle count (sum L_i + 5: 2309 and 1797 cycles for the first
// two, as in the paper's hardware table), that run selects the layers in order for exactly
// L_i cycles each with t = 0..L_i-1, the drain cycle between layers, the clr pulse at start
// and a single done pulse.
module tb_asl_controller;
  import asl_pkg::*;
  localparam int NL = 5;
  logic clk = 0, rst_n = 0, start = 0, clr, busy, done;
  len_log2_t len_log2 [NL];
  logic [NL-1:0] run;
  logic [2:0] layer;
  logic [9:0] t;
  len_log2_t len_cur, len_prev;
  int checks = 0, failures = 0;
  asl_controller #(.NL(NL), .LOG2(10)) dut (.clk, .rst_n, .start, .len_log2, .clr, .run, .layer,
                                            .t, .len_cur, .len_prev, .busy, .done);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic run_cfg(input int c0, c1, c2, c3, c4, input int expect_cycles);
    int cfg [NL], eff [NL];
    int busy_n, exp_layer, exp_t, done_n;
    bit in_drain;
    cfg = '{c0, c1, c2, c3, c4};
    for (int i = 0; i < NL; i++) begin
      len_log2[i] = len_log2_t'(cfg[i]);
      eff[i] = (cfg[i] > 10) ? 10 : cfg[i];
    end
    @(negedge clk);
    start = 1;
    #1 check(clr == 1, "clr with start");
    @(negedge clk);
    start = 0;
    busy_n = 0; exp_layer = 0; exp_t = 0; done_n = 0; in_drain = 0;
    while (!done) begin
      check(busy && !clr, "busy during inference");
      busy_n++;
      if (!in_drain) begin
        check(run == NL'(1 << exp_layer) && t == 10'(exp_t) && len_cur == len_log2_t'(eff[exp_layer]),
              $sformatf("layer %0d bit %0d: run=%b t=%0d", exp_layer, exp_t, run, t));
        if (exp_layer > 0) check(len_prev == len_log2_t'(eff[exp_layer-1]), "len_prev");
        exp_t++;
        if (exp_t == (1 << eff[exp_layer])) in_drain = 1;
      end else begin
        check(run == '0, "drain cycle has no run");
        in_drain = 0; exp_t = 0; exp_layer++;
      end
      @(negedge clk);
      if (busy_n > 6000) break;
    end
    check(busy_n == expect_cycles, $sformatf("cycles %0d expected %0d", busy_n, expect_cycles));
    check(exp_layer == NL, "all layers ran");
    @(negedge clk);
    check(!done && !busy, "done is a single pulse");
  endtask
  initial begin
    for (int i = 0; i < NL; i++) len_log2[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_cfg(10, 9, 8, 8, 8, 2309);
    run_cfg(10, 9, 7, 6, 6, 1797);
    run_cfg(10, 10, 10, 10, 10, 5125);
    run_cfg(2, 3, 0, 1, 2, 4 + 8 + 1 + 2 + 4 + 5);
    run_cfg(15, 6, 6, 6, 6, 1024 + 4 * 64 + 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
