// tb_sc_mlp_asl_wl: the published length configurations on a network with the full stream
// length (L = 1024, 10-bit SNG values) and the paper's layer shape scaled down by 8
// (98-128-128-64-32-10 instead of 784-1024-1024-512-256-10). All weights, biases and inputs are
// written through the load ports. It runs, on the same weights and inputs, the full-length
// setting and the coarse and fine settings of the published tables:
//   [1024]*5 -> 5125 cycles, coarse [1024,512,256,256,256] -> 2309,
//   fine Fashion-MNIST [1024,512,128,64,64] -> 1797, fine SVHN [1024,512,256,64,64] -> 1925,
//   fine CIFAR10 [1024,512,256,128,64] -> 1989, and uniform 512/256/128/64 -> 2565/1285/645/325,
// and checks each cycle count and the ten output counts against a bit-accurate reference.
module tb_sc_mlp_asl_wl;
  import asl_pkg::*;
  import tb_ref_pkg::*;
  localparam int NL = 5, W = 10, NOUT = 10, LOG2 = 10;
  localparam int unsigned SIZES [NL+1] = '{98, 128, 128, 64, 32, 10};
  localparam int RW = 8;

  logic clk = 0, rst_n = 0, start = 0, busy, done, wl_we = 0, xl_we = 0;
  len_log2_t len_log2 [NL];
  logic [2:0] wl_layer;
  logic [RW-1:0] wl_row, wl_col, xl_addr;
  logic [W-1:0] wl_data, xl_data;
  logic [LOG2:0] out_count [NOUT];
  logic [NL-1:0] act_saturated;

  sc_mlp_asl #(.NL(NL), .SIZES(SIZES), .LOG2(LOG2), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned wv [NL][128][129];
  int unsigned xv [98];

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (80000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic infer(input int len [NL], input int exp_cycles);
    int cycles;
    int exp_cnt [NOUT];
    bit s_in  [1024][128];
    bit s_out [1024][128];
    int lprev;
    for (int i = 0; i < NL; i++) len_log2[i] = len_log2_t'($clog2(len[i]));
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done && cycles < 6000) begin
      cycles += busy;
      @(negedge clk);
    end
    checks++;
    if (cycles != exp_cycles) begin
      failures++; $display("FAIL %p: cycles %0d expected %0d", len, cycles, exp_cycles);
    end
    lprev = len[0];
    for (int t = 0; t < len[0]; t++)
      for (int j = 0; j < int'(SIZES[0]); j++) s_in[t][j] = xv[j] > sobol_ref(0, t, W);
    for (int l = 0; l < NL; l++) begin
      int n, nin, stw;
      n = SIZES[l]; nin = n + 1; stw = $clog2(nin + 1) + 1;
      for (int r = 0; r < int'(SIZES[l+1]); r++) begin
        int st;
        st = 1 << (stw - 1);
        for (int t = 0; t < len[l]; t++) begin
          int unsigned rnd;
          int sum, ta;
          rnd = sobol_ref(1, t, W);
          ta  = (l == 0) ? t : (t % lprev);
          sum = wv[l][r][n] > rnd;
          for (int c = 0; c < n; c++) sum += (s_in[ta][c] == (wv[l][r][c] > rnd));
          st = stanh_step(st, sum, nin, stw);
          s_out[t][r] = (st >= (1 << (stw - 1)));
        end
      end
      lprev = len[l];
      for (int t = 0; t < 1024; t++) for (int j = 0; j < 128; j++) s_in[t][j] = s_out[t][j];
    end
    for (int k = 0; k < NOUT; k++) begin
      exp_cnt[k] = 0;
      for (int t = 0; t < len[NL-1]; t++) exp_cnt[k] += s_out[t][k];
      checks++;
      if (int'(out_count[k]) != exp_cnt[k]) begin
        failures++; $display("FAIL %p output %0d count %0d expected %0d", len, k, out_count[k], exp_cnt[k]);
      end
    end
    $display("lengths %p: %0d cycles, output counts %p", len, cycles, out_count);
  endtask

  initial begin
    for (int i = 0; i < NL; i++) len_log2[i] = '0;
    wl_layer = '0; wl_row = '0; wl_col = '0; wl_data = '0; xl_addr = '0; xl_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++)
      for (int r = 0; r < int'(SIZES[l+1]); r++)
        for (int c = 0; c <= int'(SIZES[l]); c++) begin
          @(negedge clk);
          // weights around zero with a moderate spread, so that the layers stay in the
          // transition region of STanh
          wv[l][r][c] = 512 + $urandom_range(160) - 80;
          wl_we = 1; wl_layer = 3'(l); wl_row = RW'(r); wl_col = RW'(c); wl_data = W'(wv[l][r][c]);
        end
    for (int j = 0; j < int'(SIZES[0]); j++) begin
      @(negedge clk);
      wl_we = 0;
      xv[j] = $urandom_range(1023);
      xl_we = 1; xl_addr = RW'(j); xl_data = W'(xv[j]);
    end
    @(negedge clk);
    xl_we = 0;
    infer('{1024, 1024, 1024, 1024, 1024}, 5125);
    infer('{1024, 512, 256, 256, 256}, 2309);
    infer('{1024, 512, 128, 64, 64}, 1797);
    infer('{1024, 512, 256, 64, 64}, 1925);
    infer('{1024, 512, 256, 128, 64}, 1989);
    infer('{512, 512, 512, 512, 512}, 2565);
    infer('{256, 256, 256, 256, 256}, 1285);
    infer('{128, 128, 128, 128, 128}, 645);
    infer('{64, 64, 64, 64, 64}, 325);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
