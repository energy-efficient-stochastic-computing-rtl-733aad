// tb_sc_layer: a 6-input, 3-neuron layer. Weights and biases are loaded through the load
// port, then the layer is run for 64 and then 16 bits (two truncation lengths) on random input
// bits. A reference built from the tabulated Sobol points (dimension 1), the weight SNG, XNOR,
// count and STanh step predicts every output bit, which must appear with y_valid one cycle
// after the input and with y_idx equal to the input index.
module tb_sc_layer;
  import tb_ref_pkg::*;
  localparam int N = 6, M = 3, W = 10, NIN = N + 1, STW = $clog2(NIN + 1) + 1;
  logic clk = 0, rst_n = 0, clr = 0, run = 0, y_valid, saturated, wl_we = 0;
  logic [N-1:0] x_bits;
  logic [9:0] t_in, y_idx;
  logic [M-1:0] y_bits;
  logic [1:0] wl_row;
  logic [2:0] wl_col;
  logic [W-1:0] wl_data;
  int unsigned wv [M][N+1];
  int checks = 0, failures = 0;
  sc_layer #(.N(N), .M(M), .W(W), .PARTS(2), .DIM(1), .IDXW(10)) dut (
    .clk, .rst_n, .clr, .run, .x_bits, .t_in, .y_valid, .y_bits, .y_idx, .saturated,
    .wl_we, .wl_row, .wl_col, .wl_data);
  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int st [M];
    int lens [2] = '{64, 16};
    int pend_sum [M];
    bit pend;
    int pend_t;
    x_bits = '0; t_in = '0; wl_row = '0; wl_col = '0; wl_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < M; r++)
      for (int c = 0; c <= N; c++) begin
        @(negedge clk);
        wl_we = 1; wl_row = 2'(r); wl_col = 3'(c);
        wv[r][c] = (r == 0) ? 1000 : $urandom_range(1023);   // neuron 0 saturates high
        wl_data = W'(wv[r][c]);
      end
    @(negedge clk);
    wl_we = 0;
    foreach (lens[li]) begin
      clr = 1;
      @(negedge clk);
      clr = 0;
      for (int r = 0; r < M; r++) st[r] = 1 << (STW - 1);
      pend = 0;
      for (int t = 0; t <= lens[li]; t++) begin
        // output of the previous cycle
        checks++;
        if (y_valid != pend) begin failures++; $display("FAIL y_valid t=%0d", t); end
        if (pend) begin
          checks++;
          if (y_idx != 10'(pend_t)) begin failures++; $display("FAIL y_idx t=%0d", t); end
          for (int r = 0; r < M; r++) begin
            int nx;
            nx = stanh_step(st[r], pend_sum[r], NIN, STW);
            checks++;
            if (y_bits[r] != (nx >= (1 << (STW - 1)))) begin
              failures++; $display("FAIL bit L=%0d t=%0d neuron %0d", lens[li], t, r);
            end
            st[r] = nx;
          end
        end
        pend = 0;
        if (t < lens[li]) begin
          int unsigned rnd;
          run = 1; t_in = 10'(t);
          x_bits = (t % 2 == 0) ? '1 : N'($urandom);
          rnd = sobol_ref(1, t, W);
          for (int r = 0; r < M; r++) begin
            pend_sum[r] = (wv[r][N] > rnd);
            for (int c = 0; c < N; c++) pend_sum[r] += (x_bits[c] == (wv[r][c] > rnd));
          end
          pend = 1; pend_t = t;
        end else run = 0;
        @(negedge clk);
      end
      run = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
