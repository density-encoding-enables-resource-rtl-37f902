// hidden_neuron: activation of one hidden neuron of the density-encoded RVFL.
//
// For hidden neuron j each feature i contributes the product of its
// density code at position j (bipolar -1 when j < v_i, else +1) and the
// random bipolar weight W_in[j][i] (binding). The K products are summed
// (bundling) and the sum, always in [-K, K], is clipped to [-kappa, kappa]
// (the clipping nonlinearity). Bipolar values are carried as one bit,
// 1 = -1 and 0 = +1, so binding is an XOR and the sum is
// K - 2 * (number of -1 products); no code vector is ever stored.
//
// Purely combinational. Interface: the K levels v, this neuron's index j,
// the K weight bits of its row of W_in and the run-time threshold kappa;
// the output is the signed clipped activation h and, for observation, the
// unclipped sum. Follows the algorithm exactly; the one-bit sign encoding
// and the popcount form of the sum are this design's choices.
module hidden_neuron #(
  parameter int unsigned K         = rvfl_pkg::K_DEF,
  parameter int unsigned N         = rvfl_pkg::N_DEF,
  parameter int unsigned KAPPA_MAX = rvfl_pkg::KAPPA_MAX_DEF,
  localparam int unsigned VW       = rvfl_pkg::ubits(N),
  localparam int unsigned JW       = rvfl_pkg::ubits(N - 1),
  localparam int unsigned SW       = rvfl_pkg::sbits(K),
  localparam int unsigned KW       = rvfl_pkg::ubits(KAPPA_MAX),
  localparam int unsigned HW       = rvfl_pkg::sbits(KAPPA_MAX)
) (
  input  logic [K-1:0][VW-1:0] v,       // quantized level of every feature
  input  logic [JW-1:0]        j,       // index of this hidden neuron
  input  logic [K-1:0]         w_row,   // W_in[j][*], 1 = -1, 0 = +1
  input  logic [KW-1:0]        kappa,   // clipping threshold
  output logic signed [SW-1:0] sum,     // bundled input, in [-K, K]
  output logic signed [HW-1:0] h        // clipped activation
);
  localparam int unsigned CW = SW + HW;  // wide enough for the comparison

  logic [K-1:0]        bound;   // bound representation, 1 = -1
  logic [SW-1:0]       n_neg;
  logic signed [CW-1:0] s_wide, kap;

  always_comb begin
    n_neg = '0;
    for (int i = 0; i < K; i++) begin
      bound[i] = (VW'(j) < v[i]) ^ w_row[i];
      n_neg    = n_neg + SW'(bound[i]);
    end
    sum    = SW'(K) - (n_neg << 1);
    s_wide = CW'(sum);
    kap    = CW'(kappa);
    if (s_wide >= kap)       h = HW'(kap);
    else if (s_wide <= -kap) h = HW'(-kap);
    else                     h = HW'(s_wide);
  end

endmodule
