// tb_rvfl_workloads: runs rvfl_top builds at other sizes of the
// hyperparameter search than the default median network:
//   - N = 50, the smallest hidden layer of the grid (5 lanes);
//   - N = 1500, the largest (4 lanes);
//   - the default K/N/L with KAPPA_MAX = 3, the 3-bit activation build
//     quoted for kappa = 3 (seven activation values);
//   - K = 4 features and L = 10 classes, a small-input, many-class shape.
// Every build is checked pass by pass against a reference model inside
// rvfl_size_runner. The build with K=4 and L=10 is this design's own
// stress shape; the other sizes come from the hyperparameter grid.
module tb_rvfl_workloads;
  logic clk = 0;
  always #5 clk = ~clk;
  logic go = 0;

  int   c [4], f [4];
  logic fin [4];

  rvfl_size_runner #(.K(16), .N(50),   .L(4),  .LANES(5), .KAPPA_MAX(15), .PASSES(6))
    u_n50   (.clk, .go, .checks(c[0]), .failures(f[0]), .finished(fin[0]));
  rvfl_size_runner #(.K(16), .N(1500), .L(4),  .LANES(4), .KAPPA_MAX(15), .PASSES(3))
    u_n1500 (.clk, .go, .checks(c[1]), .failures(f[1]), .finished(fin[1]));
  rvfl_size_runner #(.K(16), .N(512),  .L(4),  .LANES(8), .KAPPA_MAX(3),  .PASSES(4))
    u_k3    (.clk, .go, .checks(c[2]), .failures(f[2]), .finished(fin[2]));
  rvfl_size_runner #(.K(4),  .N(100),  .L(10), .LANES(10), .KAPPA_MAX(7), .PASSES(6))
    u_l10   (.clk, .go, .checks(c[3]), .failures(f[3]), .finished(fin[3]));

  function automatic int total(input int a [4]);
    return a[0] + a[1] + a[2] + a[3];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", total(c), total(f) + 1);
    $finish;
  end

  initial begin
    @(negedge clk);
    go = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    @(negedge clk);
    $display("N=50: %0d/%0d  N=1500: %0d/%0d  KAPPA_MAX=3: %0d/%0d  K=4,L=10: %0d/%0d (failures/checks)",
             f[0], c[0], f[1], c[1], f[2], c[2], f[3], c[3]);
    $display("TB_RESULT checks=%0d failures=%0d", total(c), total(f));
    $finish;
  end
endmodule
