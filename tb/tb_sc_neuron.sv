// tb_sc_neuron: an 8-input neuron with random weights, bias, input bits and random numbers.
// A reference computes the weight bits (w > rnd), the XNOR products plus the bias bit, their
// count and the STanh step, and the neuron's output must match it one cycle later.
module tb_sc_neuron;
  import tb_ref_pkg::*;
  localparam int N = 8, W = 10, NIN = N + 1, STW = $clog2(NIN + 1) + 1;
  logic clk = 0, rst_n = 0, clr = 0, valid_in = 0, out_valid, out_bit, saturated;
  logic [N-1:0] x_bits;
  logic [W-1:0] w [N];
  logic [W-1:0] b, rnd;
  int checks = 0, failures = 0;
  sc_neuron #(.N(N), .W(W), .PARTS(3)) dut (.clk, .rst_n, .clr, .valid_in, .x_bits, .w, .b, .rnd,
                                            .out_valid, .out_bit, .saturated);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int st, pend_sum, nx;
    bit pend;
    x_bits = '0; b = '0; rnd = '0;
    for (int j = 0; j < N; j++) w[j] = W'($urandom);
    b = W'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    st = 1 << (STW - 1); pend = 0; pend_sum = 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      // check the bit computed from last cycle's inputs
      checks++;
      if (out_valid != pend) begin failures++; $display("FAIL valid c=%0d", c); end
      if (pend) begin
        nx = stanh_step(st, pend_sum, NIN, STW);
        checks++;
        if (out_bit != (nx >= (1 << (STW - 1)))) begin
          failures++; $display("FAIL bit c=%0d", c);
        end
        st = nx;
      end
      if (c % 400 == 0) begin
        for (int j = 0; j < N; j++) w[j] = W'($urandom);
        b = W'($urandom);
      end
      valid_in = ($urandom_range(5) != 0);
      x_bits   = N'($urandom);
      rnd      = W'($urandom);
      #1;
      pend = valid_in;
      if (valid_in) begin
        pend_sum = (b > rnd);
        for (int j = 0; j < N; j++) pend_sum += (x_bits[j] == (w[j] > rnd));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
