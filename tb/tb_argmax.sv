// tb_argmax: checks class selection on random signed outputs, on outputs
// drawn from a tiny range so that ties are frequent (lowest index must
// win), and on the extreme values of the 18-bit output range.
module tb_argmax;
  int checks = 0, failures = 0;

  logic signed [3:0][17:0] y;
  logic [1:0]              cls;
  logic signed [17:0]      y_max;

  argmax u_dut (.y, .cls, .y_max);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ties = 0;
    for (int t = 0; t < 3000; t++) begin
      int vals [4];
      int best, bi;
      for (int l = 0; l < 4; l++) begin
        case (t % 3)
          0: vals[l] = $urandom_range(262143) - 131072;
          1: vals[l] = $urandom_range(2) - 1;
          default: vals[l] = ($urandom_range(1) == 0) ? -131072 : 131071;
        endcase
        y[l] = 18'(vals[l]);
      end
      best = vals[0]; bi = 0;
      for (int l = 1; l < 4; l++) if (vals[l] > best) begin best = vals[l]; bi = l; end
      for (int l = 0; l < 4; l++) if (l != bi && vals[l] == best) ties++;
      #1;
      checks += 2;
      if (int'(cls) != bi) begin
        failures++;
        $display("t=%0d: cls=%0d expected %0d", t, cls, bi);
      end
      if (int'(y_max) != best) begin
        failures++;
        $display("t=%0d: y_max=%0d expected %0d", t, y_max, best);
      end
    end
    checks++;
    if (ties == 0) begin
      failures++;
      $display("no tie was exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
