// tb_rvfl_top_full: the classifier at its default size, K = 16 features,
// N = 512 hidden neurons, L = 4 classes, 5-bit readout weights, 8 lanes.
// Random W_in and W_out (weights in [-15, 15]) are loaded through the load
// ports, then four passes with random features and kappa = 1, 3, 7, 15 (the
// clipping thresholds of the hyperparameter search) are run. Each pass is
// checked against a reference model written from the equations (quantize,
// bipolar code, binding, sum, clipping, readout, largest output) and for
// its latency of N/8 + 3 = 67 cycles.
module tb_rvfl_top_full;
  localparam int K = 16, N = 512, L = 4, WB = 5, LANES = 8, G = N / LANES;
  localparam int YW = 18;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, start, busy, done, cfg_ready, start_dropped;
  logic win_we, wout_we;
  logic [5:0] win_waddr, wout_waddr;
  logic [LANES*K-1:0]    win_wdata;
  logic [LANES*L*WB-1:0] wout_wdata;
  logic [K-1:0][8:0]     x;
  logic [3:0]            kappa;
  logic signed [L-1:0][YW-1:0] y;
  logic [1:0]            cls;

  rvfl_top u_dut (
    .clk, .rst, .cfg_ready, .win_we, .win_waddr, .win_wdata, .wout_we,
    .wout_waddr, .wout_wdata, .start, .x, .kappa, .busy, .done, .y, .cls,
    .start_dropped);

  int win_m  [N][K];
  int wout_m [L][N];
  int kappas [4] = '{1, 3, 7, 15};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; start = 0; win_we = 0; wout_we = 0; win_waddr = '0; wout_waddr = '0;
    win_wdata = '0; wout_wdata = '0; x = '0; kappa = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int j = 0; j < N; j++) begin
      for (int i = 0; i < K; i++) win_m[j][i] = ($urandom_range(1) == 1) ? -1 : 1;
      for (int l = 0; l < L; l++) wout_m[l][j] = $urandom_range(30) - 15;
    end
    for (int g = 0; g < G; g++) begin
      @(negedge clk);
      win_we = 1; wout_we = 1; win_waddr = 6'(g); wout_waddr = 6'(g);
      for (int p = 0; p < LANES; p++) begin
        for (int i = 0; i < K; i++) win_wdata[p*K + i] = (win_m[g*LANES + p][i] < 0);
        for (int l = 0; l < L; l++) wout_wdata[(p*L + l)*WB +: WB] = WB'(wout_m[l][g*LANES + p]);
      end
    end
    @(negedge clk);
    win_we = 0; wout_we = 0;

    for (int t = 0; t < 4; t++) begin
      automatic int xq [K];
      automatic int v [K];
      automatic int hs [N];
      automatic int yr [L];
      automatic int kap = kappas[t];
      automatic int best, bi, cyc;
      for (int i = 0; i < K; i++) begin
        xq[i] = $urandom_range(256);
        v[i]  = int'($floor(real'(xq[i]) * N / 256.0 + 0.5));
      end
      for (int j = 0; j < N; j++) begin
        automatic int s = 0;
        for (int i = 0; i < K; i++) s += ((j < v[i]) ? -1 : 1) * win_m[j][i];
        hs[j] = (s >= kap) ? kap : (s <= -kap) ? -kap : s;
      end
      for (int l = 0; l < L; l++) begin
        yr[l] = 0;
        for (int j = 0; j < N; j++) yr[l] += wout_m[l][j] * hs[j];
      end
      best = yr[0]; bi = 0;
      for (int l = 1; l < L; l++) if (yr[l] > best) begin best = yr[l]; bi = l; end

      @(negedge clk);
      for (int i = 0; i < K; i++) x[i] = 9'(xq[i]);
      kappa = 4'(kap);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 200) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != G + 3) begin
        failures++;
        $display("latency %0d cycles, expected %0d", cyc, G + 3);
      end
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(signed'(y[l])) != yr[l]) begin
          failures++;
          $display("kappa %0d class %0d: y=%0d expected %0d", kap, l, signed'(y[l]), yr[l]);
        end
      end
      checks++;
      if (int'(cls) != bi) begin
        failures++;
        $display("kappa %0d: cls=%0d expected %0d", kap, cls, bi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
