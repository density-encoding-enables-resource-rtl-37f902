// tb_density_quantizer: checks the feature quantizer v = round(x * N).
// First the five features of the worked example with N = 10 (inputs
// 0.276, 0.680, 0.955, 0.163, 0.119 must give levels 3, 7, 10, 2, 1), then
// every input code 0 .. 511 at N = 512 and N = 10 against a real-valued
// reference round(x * N) clamped to N.
module tb_density_quantizer;
  int checks = 0, failures = 0;

  logic [8:0] x10, x512;
  logic [3:0] v10;
  logic [9:0] v512;

  density_quantizer #(.N(10))  u10  (.x_q(x10),  .v(v10));
  density_quantizer            u512 (.x_q(x512), .v(v512));

  function automatic int ref_v(int xq, int n);
    int r = int'($floor(real'(xq) * n / 256.0 + 0.5));
    return (r > n) ? n : r;
  endfunction

  real ex_x [5] = '{0.276, 0.680, 0.955, 0.163, 0.119};
  int  ex_v [5] = '{3, 7, 10, 2, 1};

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5; i++) begin
      x10 = 9'(int'(ex_x[i] * 256.0));
      #1;
      checks++;
      if (int'(v10) != ex_v[i]) begin
        failures++;
        $display("example feature %0d: v=%0d expected %0d", i + 1, v10, ex_v[i]);
      end
    end
    for (int xq = 0; xq < 512; xq++) begin
      x10 = 9'(xq); x512 = 9'(xq);
      #1;
      checks += 2;
      if (int'(v10) != ref_v(xq, 10)) begin
        failures++;
        $display("N=10 x_q=%0d: v=%0d expected %0d", xq, v10, ref_v(xq, 10));
      end
      if (int'(v512) != ref_v(xq, 512)) begin
        failures++;
        $display("N=512 x_q=%0d: v=%0d expected %0d", xq, v512, ref_v(xq, 512));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
