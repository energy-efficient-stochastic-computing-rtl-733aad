// tb_stanh_lfsm: drives random counts into an STanh with NIN = 9 inputs and 2**5 states and
// compares out_bit, saturation and the state sequence with a reference model; also checks clr
// and that a strongly positive (negative) input saturates the output at 1 (0).
module tb_stanh_lfsm;
  import tb_ref_pkg::*;
  localparam int NIN = 9, STW = 5;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, out_bit, saturated;
  logic [3:0] sum;
  int checks = 0, failures = 0;
  stanh_lfsm #(.NIN(NIN), .STW(STW)) dut (.clk, .rst_n, .clr, .en, .sum, .out_bit, .saturated);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int st, nx, raw, ones;
    sum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    st = 1 << (STW - 1);
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      clr = (c % 700 == 699);
      en  = !clr && ($urandom_range(4) != 0);
      // bias the input in phases: strongly positive, strongly negative, near zero
      if (c < 300)      sum = 4'($urandom_range(NIN, 6));
      else if (c < 600) sum = 4'($urandom_range(3, 0));
      else              sum = 4'($urandom_range(NIN, 0));
      #1;
      raw = st + 2 * sum - NIN;
      nx  = stanh_step(st, sum, NIN, STW);
      checks++;
      if (out_bit != (nx >= (1 << (STW - 1))) || saturated != (raw != nx)) begin
        failures++; $display("FAIL c=%0d st=%0d sum=%0d out=%0b sat=%0b", c, st, sum, out_bit, saturated);
      end
      if (c == 299) begin checks++; if (!out_bit) begin failures++; $display("FAIL not high"); end end
      if (c == 599) begin checks++; if (out_bit)  begin failures++; $display("FAIL not low");  end end
      if (clr) st = 1 << (STW - 1);
      else if (en) st = nx;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
