// rvfl_size_runner: testbench helper that exercises one build of rvfl_top
// with the given sizes. On go it loads random W_in (+-1) and W_out
// (integers within the 5-bit symmetric range) through the load ports, runs
// PASSES classifications with random features and random kappa in
// 0..KAPPA_MAX and compares y, cls and the latency N/LANES + 3 with a
// reference model computed from the equations. It counts its checks and
// failures and raises finished at the end.
module rvfl_size_runner #(
  parameter int K         = 16,
  parameter int N         = 512,
  parameter int L         = 4,
  parameter int LANES     = 8,
  parameter int KAPPA_MAX = 15,
  parameter int PASSES    = 4
) (
  input  logic clk,
  input  logic go,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int WB  = 5;
  localparam int G   = N / LANES;
  localparam int AW  = rvfl_pkg::ubits(G - 1);
  localparam int KW  = rvfl_pkg::ubits(KAPPA_MAX);
  localparam int YW  = rvfl_pkg::sbits(N * KAPPA_MAX * 16);
  localparam int CW  = rvfl_pkg::ubits(L - 1);

  logic rst, start, busy, done, cfg_ready, start_dropped;
  logic win_we, wout_we;
  logic [AW-1:0]            win_waddr, wout_waddr;
  logic [LANES*K-1:0]       win_wdata;
  logic [LANES*L*WB-1:0]    wout_wdata;
  logic [K-1:0][8:0]        x;
  logic [KW-1:0]            kappa;
  logic signed [L-1:0][YW-1:0] y;
  logic [CW-1:0]            cls;

  rvfl_top #(.K(K), .N(N), .L(L), .LANES(LANES), .KAPPA_MAX(KAPPA_MAX)) u_dut (
    .clk, .rst, .cfg_ready, .win_we, .win_waddr, .win_wdata, .wout_we,
    .wout_waddr, .wout_wdata, .start, .x, .kappa, .busy, .done, .y, .cls,
    .start_dropped);

  int win_m  [N][K];
  int wout_m [L][N];

  initial begin
    checks = 0; failures = 0; finished = 0;
    rst = 1; start = 0; win_we = 0; wout_we = 0; win_waddr = '0; wout_waddr = '0;
    win_wdata = '0; wout_wdata = '0; x = '0; kappa = '0;
    wait (go);
    repeat (2) @(negedge clk);
    rst = 0;
    for (int j = 0; j < N; j++) begin
      for (int i = 0; i < K; i++) win_m[j][i] = ($urandom_range(1) == 1) ? -1 : 1;
      for (int l = 0; l < L; l++) wout_m[l][j] = $urandom_range(30) - 15;
    end
    for (int g = 0; g < G; g++) begin
      @(negedge clk);
      win_we = 1; wout_we = 1; win_waddr = AW'(g); wout_waddr = AW'(g);
      for (int p = 0; p < LANES; p++) begin
        for (int i = 0; i < K; i++) win_wdata[p*K + i] = (win_m[g*LANES + p][i] < 0);
        for (int l = 0; l < L; l++) wout_wdata[(p*L + l)*WB +: WB] = WB'(wout_m[l][g*LANES + p]);
      end
    end
    @(negedge clk);
    win_we = 0; wout_we = 0;

    for (int t = 0; t < PASSES; t++) begin
      automatic int xq [K];
      automatic int v [K];
      automatic int hs [N];
      automatic int yr [L];
      automatic int kap = (t == 0) ? KAPPA_MAX : $urandom_range(KAPPA_MAX);
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
      kappa = KW'(kap);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < G + 50) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != G + 3) begin
        failures++;
        $display("K=%0d N=%0d L=%0d: latency %0d expected %0d", K, N, L, cyc, G + 3);
      end
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(signed'(y[l])) != yr[l]) begin
          failures++;
          $display("K=%0d N=%0d L=%0d kappa %0d class %0d: y=%0d expected %0d",
                   K, N, L, kap, l, signed'(y[l]), yr[l]);
        end
      end
      checks++;
      if (int'(cls) != bi) begin
        failures++;
        $display("K=%0d N=%0d L=%0d: cls=%0d expected %0d", K, N, L, cls, bi);
      end
    end
    finished = 1;
  end
endmodule
