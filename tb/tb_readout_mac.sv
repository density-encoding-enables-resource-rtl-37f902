// tb_readout_mac: checks the integer readout y = W_out * h at the default
// sizes (8 lanes, 4 classes, 5-bit weights, activations up to +-15).
// Each pass clears the accumulators and feeds 64 groups of random
// activations and weights, with random idle cycles (en low) in between,
// then compares every y with a reference sum; extreme passes use only the
// largest magnitudes to check the accumulator width.
module tb_readout_mac;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, clr, en;
  logic signed [7:0][4:0]      h;
  logic signed [7:0][3:0][4:0] w;
  logic signed [3:0][17:0]     y;

  readout_mac u_dut (.clk, .rst, .clr, .en, .h, .w, .y);

  longint ref_y [4];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; clr = 0; en = 0; h = '0; w = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int pass = 0; pass < 20; pass++) begin
      clr = 1; en = 1;          // clear must win over enable
      @(negedge clk);
      clr = 0; en = 0;
      foreach (ref_y[l]) ref_y[l] = 0;
      for (int g = 0; g < 64; g++) begin
        for (int p = 0; p < 8; p++) begin
          automatic int hv = (pass >= 18) ? ((pass == 18) ? 15 : -15) : $urandom_range(30) - 15;
          h[p] = 5'(hv);
          for (int l = 0; l < 4; l++) begin
            automatic int wv = (pass >= 18) ? -15 : $urandom_range(30) - 15;
            w[p][l] = 5'(wv);
            ref_y[l] += hv * wv;
          end
        end
        en = 1;
        @(negedge clk);
        en = 0;
        // idle cycles with garbage inputs must not change the sums
        if ($urandom_range(3) == 0) begin
          h = '1; w = '1;
          @(negedge clk);
        end
      end
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (longint'(signed'(y[l])) != ref_y[l]) begin
          failures++;
          $display("pass %0d class %0d: y=%0d expected %0d", pass, l, y[l], ref_y[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
