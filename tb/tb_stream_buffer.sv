// tb_stream_buffer: writes random words to a 64 x 12 buffer, then reads them back in random
// order, with writes to other addresses in between.
module tb_stream_buffer;
  localparam int M = 12, DEPTH = 64;
  logic clk = 0, we = 0;
  logic [5:0] waddr, raddr;
  logic [M-1:0] wdata, rdata;
  logic [M-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;
  stream_buffer #(.M(M), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    raddr = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = M'($urandom); ref_mem[a] = wdata;
    end
    for (int c = 0; c < 1000; c++) begin
      @(negedge clk);
      we = 0;
      raddr = 6'($urandom);
      #1;
      checks++;
      if (rdata != ref_mem[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      if (c % 3 == 0) begin
        we = 1; waddr = 6'($urandom); wdata = M'($urandom); ref_mem[waddr] = wdata;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
