// density_quantizer: turns one input feature into the level of its
// density-based (thermometer) code.
//
// The feature x in [0,1] is carried as an unsigned fixed point number x_q
// with FRAC_BITS fraction bits and one integer bit (x = x_q / 2^FRAC_BITS).
// The output is v = round(x * N), clamped to [0, N], computed as
// (x_q * N + 2^(FRAC_BITS-1)) >> FRAC_BITS, i.e. halves are rounded up.
// The code itself is never built: bit j of the code is "one" (bipolar -1)
// exactly when j < v, which the hidden neurons test directly.
//
// Purely combinational. Following the algorithm: quantization to the
// nearest of the N+1 levels. This design's own choices: the input format,
// round-half-up, and clamping of inputs above 1.0.
module density_quantizer #(
  parameter int unsigned N         = rvfl_pkg::N_DEF,
  parameter int unsigned FRAC_BITS = rvfl_pkg::FRAC_BITS_DEF,
  localparam int unsigned XW       = FRAC_BITS + 1,
  localparam int unsigned VW       = rvfl_pkg::ubits(N)
) (
  input  logic [XW-1:0] x_q,  // feature, unsigned Q1.FRAC_BITS
  output logic [VW-1:0] v     // quantized level, 0..N
);
  localparam int unsigned PW = XW + VW + 1;

  logic [PW-1:0] scaled;

  always_comb begin
    scaled = PW'(x_q) * PW'(N) + PW'(1 << (FRAC_BITS - 1));
    if ((scaled >> FRAC_BITS) > PW'(N)) v = VW'(N);
    else                                v = VW'(scaled >> FRAC_BITS);
  end

endmodule
