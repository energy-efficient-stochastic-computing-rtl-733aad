// tb_sng: exhaustive check of the SNG comparator for W = 6 (output = value > random) and a
// stream check: against all 64 random values a value v gives exactly v ones.
module tb_sng;
  localparam int W = 6;
  logic [W-1:0] value, rnd;
  logic bit_o;
  int checks = 0, failures = 0;
  sng #(.W(W)) dut (.value, .rnd, .bit_o);
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int v = 0; v < 64; v++) begin
      int ones;
      ones = 0;
      for (int r = 0; r < 64; r++) begin
        value = W'(v); rnd = W'(r); #1;
        checks++;
        if (bit_o !== (v > r)) begin failures++; $display("FAIL v=%0d r=%0d", v, r); end
        ones += bit_o;
      end
      checks++;
      if (ones != v) begin failures++; $display("FAIL ones v=%0d got %0d", v, ones); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
