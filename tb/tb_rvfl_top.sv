// tb_rvfl_top: end-to-end test of the classifier at reduced size.
//
// Configuration: K = 5 features, N = 10 hidden neurons, L = 3 classes,
// 2 lanes (5 groups), 5-bit readout weights. The first pass replays the
// worked example (features 0.276 0.680 0.955 0.163 0.119, the printed W_in
// table, kappa = 2), whose hidden activations are known to be
// -2 +1 -1 +1 +2 +1 +1 +2 -2 -1; the readout weights are chosen so that the
// expected outputs follow directly from those activations. Then random
// passes with random W_in, W_out, features and kappa in {0..15} are checked
// against a reference model written here from the equations: quantize,
// build the bipolar code F, bind with W_in, sum, clip, multiply with W_out,
// take the largest output.
//
// Every pass checks y, cls and the start-to-done latency (N/LANES + 3).
// Mechanisms counted, each must occur at least once: clipping at +kappa,
// clipping at -kappa, a change of kappa between passes, a start ignored
// while busy, a weight write dropped while busy, a tie in the class
// decision.
module tb_rvfl_top;
  localparam int K = 5, N = 10, L = 3, WB = 5, LANES = 2, G = N / LANES;
  localparam int YW = rvfl_pkg::sbits(N * 15 * 16);

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, start, busy, done, cfg_ready, start_dropped;
  logic win_we, wout_we;
  logic [2:0] win_waddr, wout_waddr;
  logic [LANES*K-1:0]       win_wdata;
  logic [LANES*L*WB-1:0]    wout_wdata;
  logic [K-1:0][8:0]        x;
  logic [3:0]               kappa;
  logic signed [L-1:0][YW-1:0] y;
  logic [1:0]               cls;

  rvfl_top #(.K(K), .N(N), .L(L), .LANES(LANES)) u_dut (
    .clk, .rst, .cfg_ready, .win_we, .win_waddr, .win_wdata, .wout_we,
    .wout_waddr, .wout_wdata, .start, .x, .kappa, .busy, .done, .y, .cls,
    .start_dropped);

  // reference copies of the weights
  int win_m  [N][K];   // bipolar +-1
  int wout_m [L][N];   // integers in [-15, 15]

  // mechanism counters
  int n_clip_hi = 0, n_clip_lo = 0, n_kappa_switch = 0, n_start_drop = 0;
  int n_cfg_drop = 0, n_tie = 0;
  int last_kappa = -1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights();
    for (int g = 0; g < G; g++) begin
      @(negedge clk);
      win_we = 1; wout_we = 1;
      win_waddr = 3'(g); wout_waddr = 3'(g);
      for (int p = 0; p < LANES; p++) begin
        for (int i = 0; i < K; i++) win_wdata[p*K + i] = (win_m[g*LANES + p][i] < 0);
        for (int l = 0; l < L; l++)
          wout_wdata[(p*L + l)*WB +: WB] = WB'(wout_m[l][g*LANES + p]);
      end
    end
    @(negedge clk);
    win_we = 0; wout_we = 0;
  endtask

  // Runs one pass and checks it against the reference model.
  task automatic run_pass(input int xq [K], input int kap, input bit poke);
    int v [K], hs [N], yr [L], best, bi, cyc;
    // reference model
    for (int i = 0; i < K; i++) begin
      v[i] = int'($floor(real'(xq[i]) * N / 256.0 + 0.5));
      if (v[i] > N) v[i] = N;
    end
    for (int j = 0; j < N; j++) begin
      int s = 0;
      for (int i = 0; i < K; i++) s += ((j < v[i]) ? -1 : 1) * win_m[j][i];
      hs[j] = (s >= kap) ? kap : (s <= -kap) ? -kap : s;
      if (kap > 0 && s > kap)  n_clip_hi++;
      if (kap > 0 && s < -kap) n_clip_lo++;
    end
    for (int l = 0; l < L; l++) begin
      yr[l] = 0;
      for (int j = 0; j < N; j++) yr[l] += wout_m[l][j] * hs[j];
    end
    best = yr[0]; bi = 0;
    for (int l = 1; l < L; l++) if (yr[l] > best) begin best = yr[l]; bi = l; end
    for (int l = 0; l < L; l++) if (l != bi && yr[l] == best) begin n_tie++; break; end
    if (last_kappa >= 0 && kap != last_kappa) n_kappa_switch++;
    last_kappa = kap;

    // drive the pass
    @(negedge clk);
    for (int i = 0; i < K; i++) x[i] = 9'(xq[i]);
    kappa = 4'(kap);
    start = 1;
    @(negedge clk);
    start = 0;
    x = '1; kappa = '1;       // inputs are captured at start
    cyc = 1;
    if (poke) begin
      // start and a weight write while busy must both be ignored
      start = 1; win_we = 1; win_waddr = '0; win_wdata = ~win_wdata;
      #1;
      if (start_dropped) n_start_drop++;
      if (!cfg_ready)    n_cfg_drop++;
      @(negedge clk);
      start = 0; win_we = 0;
      cyc++;
    end
    while (!done && cyc < 100) begin
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
        $display("class %0d: y=%0d expected %0d", l, y[l], yr[l]);
      end
    end
    checks++;
    if (int'(cls) != bi) begin
      failures++;
      $display("cls=%0d expected %0d", cls, bi);
    end
  endtask

  int ex_win [K][N] = '{
    '{ 1,-1,-1,-1, 1, 1, 1, 1,-1,-1},
    '{ 1,-1, 1,-1,-1, 1,-1, 1,-1,-1},
    '{-1, 1, 1, 1, 1,-1,-1,-1, 1, 1},
    '{ 1, 1,-1, 1, 1, 1,-1, 1, 1, 1},
    '{ 1, 1, 1, 1, 1,-1,-1,-1,-1, 1}};
  int ex_h [N] = '{-2, 1, -1, 1, 2, 1, 1, 2, -2, -1};

  initial begin
    int xq [K];
    rst = 1; start = 0; win_we = 0; wout_we = 0; win_waddr = '0; wout_waddr = '0;
    win_wdata = '0; wout_wdata = '0; x = '0; kappa = '0;
    repeat (3) @(negedge clk);
    rst = 0;

    // pass 1: the worked example. Class 0 weights are the activations
    // themselves (y0 = sum h^2 = 22), class 1 all ones (y1 = sum h = 2),
    // class 2 their negation (y2 = -22).
    for (int j = 0; j < N; j++) begin
      for (int i = 0; i < K; i++) win_m[j][i] = ex_win[i][j];
      wout_m[0][j] = ex_h[j];
      wout_m[1][j] = 1;
      wout_m[2][j] = -ex_h[j];
    end
    load_weights();
    xq = '{71, 174, 244, 42, 30};   // 0.276 0.680 0.955 0.163 0.119 in Q1.8
    run_pass(xq, 2, 0);
    checks += 3;
    if (int'(signed'(y[0])) != 22 || int'(signed'(y[1])) != 2 || int'(signed'(y[2])) != -22) begin
      failures++;
      $display("worked example: y = %0d %0d %0d, expected 22 2 -22", y[0], y[1], y[2]);
    end
    if (cls != 2'd0) failures++;
    if (!(n_clip_hi > 0 && n_clip_lo > 0)) failures++;

    // random passes
    for (int t = 0; t < 60; t++) begin
      if (t % 10 == 0) begin
        for (int j = 0; j < N; j++) begin
          for (int i = 0; i < K; i++) win_m[j][i] = ($urandom_range(1) == 1) ? -1 : 1;
          for (int l = 0; l < L; l++)
            wout_m[l][j] = (t == 20) ? 0 : $urandom_range(30) - 15;   // t == 20: all ties
        end
        load_weights();
      end
      for (int i = 0; i < K; i++) xq[i] = (t % 4 == 3) ? $urandom_range(300) : $urandom_range(256);
      run_pass(xq, (t % 3 == 0) ? $urandom_range(15) : $urandom_range(3), (t % 5 == 1));
    end

    $display("mechanisms: clip_hi=%0d clip_lo=%0d kappa_switch=%0d start_dropped=%0d cfg_dropped=%0d tie=%0d",
             n_clip_hi, n_clip_lo, n_kappa_switch, n_start_drop, n_cfg_drop, n_tie);
    checks += 6;
    if (n_clip_hi == 0)      begin failures++; $display("clipping at +kappa never happened"); end
    if (n_clip_lo == 0)      begin failures++; $display("clipping at -kappa never happened"); end
    if (n_kappa_switch == 0) begin failures++; $display("kappa never changed"); end
    if (n_start_drop == 0)   begin failures++; $display("no start was dropped"); end
    if (n_cfg_drop == 0)     begin failures++; $display("no write was dropped"); end
    if (n_tie == 0)          begin failures++; $display("no tie in the class decision"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
