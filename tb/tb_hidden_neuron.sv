// tb_hidden_neuron: checks binding, bundling and clipping of one hidden
// neuron.
// Part 1 replays the worked example with K = 5 features and N = 10: levels
// v = 3, 7, 10, 2, 1, the printed W_in table and kappa = 2 must give the
// printed neuron inputs -3 +1 -1 +1 +3 +1 +1 +3 -3 -1 and activations
// -2 +1 -1 +1 +2 +1 +1 +2 -2 -1.
// Part 2 uses the default sizes (K = 16, N = 512) with random levels,
// weights, neuron indices and kappa in {0..15}, against a reference that
// builds the bipolar code F explicitly and multiplies it with W_in.
module tb_hidden_neuron;
  int checks = 0, failures = 0;

  // worked example, K = 5, N = 10
  logic [4:0][3:0] ev;
  logic [3:0]      ej;
  logic [4:0]      ew;
  logic [3:0]      ekap;
  logic signed [3:0] esum;
  logic signed [4:0] eh;

  hidden_neuron #(.K(5), .N(10)) u_ex (
    .v(ev), .j(ej), .w_row(ew), .kappa(ekap), .sum(esum), .h(eh));

  int win_ex [5][10] = '{
    '{ 1,-1,-1,-1, 1, 1, 1, 1,-1,-1},
    '{ 1,-1, 1,-1,-1, 1,-1, 1,-1,-1},
    '{-1, 1, 1, 1, 1,-1,-1,-1, 1, 1},
    '{ 1, 1,-1, 1, 1, 1,-1, 1, 1, 1},
    '{ 1, 1, 1, 1, 1,-1,-1,-1,-1, 1}};
  int v_ex   [5]  = '{3, 7, 10, 2, 1};
  int sum_ex [10] = '{-3, 1, -1, 1, 3, 1, 1, 3, -3, -1};
  int h_ex   [10] = '{-2, 1, -1, 1, 2, 1, 1, 2, -2, -1};

  // default sizes
  logic [15:0][9:0] dv;
  logic [8:0]       dj;
  logic [15:0]      dw;
  logic [3:0]       dkap;
  logic signed [5:0] dsum;
  logic signed [4:0] dh;

  hidden_neuron u_def (
    .v(dv), .j(dj), .w_row(dw), .kappa(dkap), .sum(dsum), .h(dh));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ekap = 4'd2;
    for (int i = 0; i < 5; i++) ev[i] = 4'(v_ex[i]);
    for (int j = 0; j < 10; j++) begin
      ej = 4'(j);
      for (int i = 0; i < 5; i++) ew[i] = (win_ex[i][j] < 0);
      #1;
      checks += 2;
      if (int'(esum) != sum_ex[j]) begin
        failures++;
        $display("example neuron %0d: sum=%0d expected %0d", j + 1, esum, sum_ex[j]);
      end
      if (int'(eh) != h_ex[j]) begin
        failures++;
        $display("example neuron %0d: h=%0d expected %0d", j + 1, eh, h_ex[j]);
      end
    end

    for (int t = 0; t < 4000; t++) begin
      int f, w, s, hr, kap, jj;
      jj   = $urandom_range(511);
      kap  = $urandom_range(15);
      dj   = 9'(jj);
      dkap = 4'(kap);
      for (int i = 0; i < 16; i++) begin
        // bias half the levels towards the neuron index to exercise both sides
        dv[i] = (t % 2 == 0) ? 10'($urandom_range(512)) : 10'(jj + $urandom_range(1));
        dw[i] = 1'($urandom_range(1));
      end
      s = 0;
      for (int i = 0; i < 16; i++) begin
        f = (jj < int'(dv[i])) ? -1 : 1;
        w = dw[i] ? -1 : 1;
        s += f * w;
      end
      hr = (s >= kap) ? kap : (s <= -kap) ? -kap : s;
      #1;
      checks += 2;
      if (int'(dsum) != s) begin
        failures++;
        $display("random %0d: sum=%0d expected %0d", t, dsum, s);
      end
      if (int'(dh) != hr) begin
        failures++;
        $display("random %0d: h=%0d expected %0d (kappa %0d)", t, dh, hr, kap);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
