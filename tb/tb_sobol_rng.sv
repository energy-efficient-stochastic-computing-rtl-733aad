// tb_sobol_rng: checks the Sobol generator of dimensions 0 and 1 (W = 10) against tabulated
// direction numbers, the stratification of every truncated prefix of 2**k points (each of the
// 2**k equal bins hit exactly once, which is what makes truncation safe), hold when en is low,
// and restart on clr.
module tb_sobol_rng;
  import tb_ref_pkg::*;
  localparam int W = 10;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [W-1:0] q0, q1;
  int checks = 0, failures = 0;

  sobol_rng #(.W(W), .DIM(0)) u0 (.clk, .rst_n, .clr, .en, .q(q0));
  sobol_rng #(.W(W), .DIM(1)) u1 (.clk, .rst_n, .clr, .en, .q(q1));

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

  int unsigned pts0 [1024], pts1 [1024];
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    en = 1;
    for (int n = 0; n < 1024; n++) begin
      pts0[n] = q0; pts1[n] = q1;
      check(q0 == W'(sobol_ref(0, n, W)), $sformatf("dim0 point %0d: %0d", n, q0));
      check(q1 == W'(sobol_ref(1, n, W)), $sformatf("dim1 point %0d: %0d", n, q1));
      @(negedge clk);
    end
    // Prefix stratification for L = 2**k, k = 1..10.
    for (int k = 1; k <= 10; k++) begin
      bit seen0 [1024], seen1 [1024];
      bit ok0, ok1;
      ok0 = 1; ok1 = 1;
      for (int b = 0; b < (1 << k); b++) begin seen0[b] = 0; seen1[b] = 0; end
      for (int n = 0; n < (1 << k); n++) begin
        int b0, b1;
        b0 = pts0[n] >> (W - k); b1 = pts1[n] >> (W - k);
        if (seen0[b0]) ok0 = 0;
        if (seen1[b1]) ok1 = 0;
        seen0[b0] = 1; seen1[b1] = 1;
      end
      check(ok0, $sformatf("dim0 prefix %0d not stratified", 1 << k));
      check(ok1, $sformatf("dim1 prefix %0d not stratified", 1 << k));
    end
    // Hold with en low.
    en = 0;
    begin
      logic [W-1:0] h0, h1;
      h0 = q0; h1 = q1;
      repeat (3) @(negedge clk);
      check(q0 == h0 && q1 == h1, "hold with en low");
    end
    // Restart, then 5 points again.
    clr = 1; @(negedge clk); clr = 0; en = 1;
    for (int n = 0; n < 5; n++) begin
      check(q0 == W'(sobol_ref(0, n, W)) && q1 == W'(sobol_ref(1, n, W)),
            $sformatf("after clr point %0d", n));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
