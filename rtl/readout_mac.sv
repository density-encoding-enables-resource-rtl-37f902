// readout_mac: integer readout layer, y = W_out * h.
//
// Keeps one accumulator per output neuron. In every cycle with en high it
// adds, for each class l, the LANES products h[p] * w[p][l] of the hidden
// activations just computed with their readout weights. clr zeroes all
// accumulators (clr wins over en). The accumulators are wide enough for N
// activations of magnitude KAPPA_MAX times the largest weight, so they
// never overflow.
//
// Timing: registers update on the rising edge; y is the accumulator state.
// Synchronous active-high reset. The readout equation is the algorithm's;
// the lane-parallel accumulation is this design's schedule.
module readout_mac #(
  parameter int unsigned N         = rvfl_pkg::N_DEF,
  parameter int unsigned L         = rvfl_pkg::L_DEF,
  parameter int unsigned WOUT_BITS = rvfl_pkg::WOUT_BITS_DEF,
  parameter int unsigned KAPPA_MAX = rvfl_pkg::KAPPA_MAX_DEF,
  parameter int unsigned LANES     = rvfl_pkg::LANES_DEF,
  localparam int unsigned HW = rvfl_pkg::sbits(KAPPA_MAX),
  localparam int unsigned YW = rvfl_pkg::sbits(N * KAPPA_MAX * (1 << (WOUT_BITS - 1)))
) (
  input  logic                                      clk,
  input  logic                                      rst,
  input  logic                                      clr,
  input  logic                                      en,
  input  logic signed [LANES-1:0][HW-1:0]           h,
  input  logic signed [LANES-1:0][L-1:0][WOUT_BITS-1:0] w,
  output logic signed [L-1:0][YW-1:0]               y
);
  logic signed [L-1:0][YW-1:0] partial;
  logic signed [YW-1:0]        h_ext, w_ext, prod;

  always_comb begin
    for (int l = 0; l < L; l++) begin
      partial[l] = '0;
      for (int p = 0; p < LANES; p++) begin
        h_ext      = YW'(signed'(h[p]));
        w_ext      = YW'(signed'(w[p][l]));
        prod       = h_ext * w_ext;
        partial[l] = partial[l] + prod;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clr) y <= '0;
    else if (en) begin
      for (int l = 0; l < L; l++) y[l] <= y[l] + partial[l];
    end
  end

endmodule
