// tb_prob_estimator: counts random streams of random length and checks the count; clr must
// zero it and en low must hold it.
module tb_prob_estimator;
  localparam int CW = 11;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, bit_i = 0;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;
  prob_estimator #(.CW(CW)) dut (.clk, .rst_n, .clr, .en, .bit_i, .count);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ones;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk);
      clr = 1; en = 0;
      @(negedge clk);
      clr = 0;
      checks++;
      if (count != 0) begin failures++; $display("FAIL clr"); end
      ones = 0;
      for (int c = 0; c < int'($urandom_range(1024, 1)); c++) begin
        en = ($urandom_range(7) != 0);
        bit_i = 1'($urandom);
        if (en && bit_i) ones++;
        @(negedge clk);
      end
      en = 0;
      checks++;
      if (count != CW'(ones)) begin failures++; $display("FAIL count %0d vs %0d", count, ones); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
