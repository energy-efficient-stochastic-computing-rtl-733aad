// tb_sc_mlp_asl: end-to-end test of the SC MLP at reduced size (8-6-6-4-4-2, L = 2**6,
// 6-bit SNG values). Weights, biases and inputs are loaded through the load ports, then
// inferences run with several layer-wise length configurations: full length, the paper's
// coarse pattern [L, L/2, L/4, L/4, L/4], a fine-grained pattern [L, L/2, L/8, L/16, L/16], and
// a pattern where some layers are longer than the one before. A bit-accurate reference
// model (tabulated Sobol points, SNG compare, XNOR, count, STanh step, truncated or wrapped
// stream reads) predicts every output count. Each inference must take sum(L_i) + 5 cycles.
// The test counts the mechanisms it exercised: truncation (a layer shorter than the one before),
// wrap-around (longer), STanh saturation, a configuration change between inferences, a weight
// reload between inferences; one that never happened counts as a failure.
module tb_sc_mlp_asl;
  import asl_pkg::*;
  import tb_ref_pkg::*;
  localparam int NL = 5, LOG2 = 6, W = 6;
  localparam int unsigned SIZES [NL+1] = '{8, 6, 6, 4, 4, 2};
  localparam int NOUT = 2, RW = 4;

  logic clk = 0, rst_n = 0, start = 0, busy, done, wl_we = 0, xl_we = 0;
  len_log2_t len_log2 [NL];
  logic [2:0] wl_layer;
  logic [RW-1:0] wl_row, wl_col, xl_addr;
  logic [W-1:0] wl_data, xl_data;
  logic [LOG2:0] out_count [NOUT];
  logic [NL-1:0] act_saturated;

  sc_mlp_asl #(.NL(NL), .SIZES(SIZES), .LOG2(LOG2), .W(W), .PARTS(2)) dut (.*);

  int checks = 0, failures = 0;
  int n_trunc = 0, n_wrap = 0, n_sat = 0, n_cfg_change = 0, n_reload = 0;
  int wv [NL][8][9];     // [layer][neuron][input], input SIZES[l] = bias
  int xv [8];

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n && |act_saturated) n_sat++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load_all();
    for (int l = 0; l < NL; l++)
      for (int r = 0; r < int'(SIZES[l+1]); r++)
        for (int c = 0; c <= int'(SIZES[l]); c++) begin
          @(negedge clk);
          wv[l][r][c] = $urandom_range((1 << W) - 1);
          wl_we = 1; wl_layer = 3'(l); wl_row = RW'(r); wl_col = RW'(c); wl_data = W'(wv[l][r][c]);
        end
    for (int j = 0; j < int'(SIZES[0]); j++) begin
      @(negedge clk);
      wl_we = 0;
      xv[j] = $urandom_range((1 << W) - 1);
      xl_we = 1; xl_addr = RW'(j); xl_data = W'(xv[j]);
    end
    @(negedge clk);
    wl_we = 0; xl_we = 0;
  endtask

  // Reference model of one inference; returns the expected output counts.
  task automatic reference(input int len [NL], output int cnt [NOUT]);
    bit s_in  [64][8];
    bit s_out [64][8];
    int lprev;
    lprev = len[0];
    for (int t = 0; t < len[0]; t++)
      for (int j = 0; j < int'(SIZES[0]); j++) s_in[t][j] = xv[j] > int'(sobol_ref(0, t, W));
    for (int l = 0; l < NL; l++) begin
      int n, nin, stw;
      n = SIZES[l]; nin = n + 1; stw = $clog2(nin + 1) + 1;
      for (int r = 0; r < int'(SIZES[l+1]); r++) begin
        int st;
        st = 1 << (stw - 1);
        for (int t = 0; t < len[l]; t++) begin
          int rnd, sum, ta;
          rnd = sobol_ref(1, t, W);
          ta  = (l == 0) ? t : (t % lprev);
          sum = wv[l][r][n] > rnd;
          for (int c = 0; c < n; c++) sum += (s_in[ta][c] == (wv[l][r][c] > rnd));
          st = stanh_step(st, sum, nin, stw);
          s_out[t][r] = (st >= (1 << (stw - 1)));
        end
      end
      lprev = len[l];
      for (int t = 0; t < 64; t++) for (int j = 0; j < 8; j++) s_in[t][j] = s_out[t][j];
    end
    for (int k = 0; k < NOUT; k++) begin
      cnt[k] = 0;
      for (int t = 0; t < len[NL-1]; t++) cnt[k] += s_out[t][k];
    end
  endtask

  int prev_cfg [NL];
  task automatic infer(input int c0, c1, c2, c3, c4);
    int cfg [NL], len [NL], exp_cnt [NOUT];
    int cycles, exp_cycles;
    bit changed;
    cfg = '{c0, c1, c2, c3, c4};
    exp_cycles = NL;
    changed = 0;
    for (int i = 0; i < NL; i++) begin
      len_log2[i] = len_log2_t'(cfg[i]);
      len[i] = 1 << cfg[i];
      exp_cycles += len[i];
      if (cfg[i] != prev_cfg[i]) changed = 1;
      if (i > 0 && len[i] < len[i-1]) n_trunc++;
      if (i > 0 && len[i] > len[i-1]) n_wrap++;
      prev_cfg[i] = cfg[i];
    end
    if (changed) n_cfg_change++;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done && cycles < 10000) begin
      cycles += busy;
      @(negedge clk);
    end
    check(cycles == exp_cycles, $sformatf("cycles %0d expected %0d", cycles, exp_cycles));
    reference(len, exp_cnt);
    for (int k = 0; k < NOUT; k++)
      check(int'(out_count[k]) == exp_cnt[k],
            $sformatf("cfg %p output %0d count %0d expected %0d", cfg, k, out_count[k], exp_cnt[k]));
  endtask

  initial begin
    for (int i = 0; i < NL; i++) begin len_log2[i] = '0; prev_cfg[i] = -1; end
    wl_layer = '0; wl_row = '0; wl_col = '0; wl_data = '0; xl_addr = '0; xl_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      load_all();
      if (rep > 0) n_reload++;
      infer(6, 6, 6, 6, 6);
      infer(6, 5, 4, 4, 4);
      infer(6, 5, 3, 2, 2);
      infer(3, 5, 2, 6, 4);
    end
    $display("mechanisms: truncation %0d wrap %0d saturation %0d config-change %0d reload %0d",
             n_trunc, n_wrap, n_sat, n_cfg_change, n_reload);
    check(n_trunc > 0, "truncation never happened");
    check(n_wrap > 0, "wrap-around never happened");
    check(n_sat > 0, "STanh saturation never happened");
    check(n_cfg_change > 0, "configuration never changed");
    check(n_reload > 0, "weights never reloaded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
