// tb_input_sng_bank: loads 5 input values, then runs truncated streams of L = 1024, 256 and
// 64 bits. With the van der Corput points of dimension 0 the first L points are the L
// multiples of 2**W/L, so input v must give exactly ceil(v * L / 2**W) ones, and every bit
// must equal v > sobol_ref(0, t).
module tb_input_sng_bank;
  import tb_ref_pkg::*;
  localparam int N = 5, W = 10;
  logic clk = 0, rst_n = 0, clr = 0, run = 0, xl_we = 0;
  logic [N-1:0] x_bits;
  logic [2:0] xl_addr;
  logic [W-1:0] xl_data;
  int unsigned vals [N] = '{0, 1, 333, 512, 1023};
  int checks = 0, failures = 0;
  input_sng_bank #(.N(N), .W(W), .DIM(0)) dut (.clk, .rst_n, .clr, .run, .x_bits, .xl_we,
                                               .xl_addr, .xl_data);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ones [N];
    int lens [3] = '{1024, 256, 64};
    xl_addr = '0; xl_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) begin
      @(negedge clk);
      xl_we = 1; xl_addr = 3'(j); xl_data = W'(vals[j]);
    end
    @(negedge clk);
    xl_we = 0;
    foreach (lens[li]) begin
      clr = 1;
      @(negedge clk);
      clr = 0; run = 1;
      for (int j = 0; j < N; j++) ones[j] = 0;
      for (int t = 0; t < lens[li]; t++) begin
        for (int j = 0; j < N; j++) begin
          ones[j] += x_bits[j];
          checks++;
          if (x_bits[j] != (vals[j] > sobol_ref(0, t, W))) begin
            failures++; $display("FAIL bit t=%0d j=%0d", t, j);
          end
        end
        @(negedge clk);
      end
      run = 0;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (ones[j] != (vals[j] * lens[li] + 1023) / 1024) begin
          failures++; $display("FAIL L=%0d input %0d ones %0d", lens[li], j, ones[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
