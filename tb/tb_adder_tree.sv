// tb_adder_tree: random bit vectors into a 37-input tree with 4 groups; the count must appear
// exactly one cycle later, and the pipeline register must hold when valid_in is low.
module tb_adder_tree;
  localparam int N = 37;
  logic clk = 0, rst_n = 0, valid_in = 0, valid_out;
  logic [N-1:0] bits;
  logic [$clog2(N+1)-1:0] sum;
  int checks = 0, failures = 0;
  adder_tree #(.N(N), .PARTS(4)) dut (.clk, .rst_n, .valid_in, .bits, .valid_out, .sum);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int held;
    bit exp_valid;
    bits = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    held = 0; exp_valid = 0;
    for (int c = 0; c < 500; c++) begin
      @(negedge clk);
      checks++;
      if (valid_out != exp_valid || sum != held) begin
        failures++;
        $display("FAIL cycle %0d sum %0d expect %0d valid %0b expect %0b", c, sum, held, valid_out, exp_valid);
      end
      valid_in = ($urandom_range(3) != 0);
      for (int j = 0; j < N; j++) bits[j] = (c % 50 == 7) ? 1'b1 : 1'($urandom);
      exp_valid = valid_in;
      if (valid_in) held = $countones(bits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
