// argmax: picks the predicted class from the output layer.
//
// Returns the index of the largest of the L signed output values; on a tie
// the lowest index wins. Taking the largest output as the prediction
// follows from the one-hot training targets; the tie rule is this design's.
// Purely combinational, a linear chain of L-1 comparisons.
module argmax #(
  parameter int unsigned L  = rvfl_pkg::L_DEF,
  parameter int unsigned YW = 18,
  localparam int unsigned CW = rvfl_pkg::ubits(L - 1)
) (
  input  logic signed [L-1:0][YW-1:0] y,
  output logic [CW-1:0]               cls,
  output logic signed [YW-1:0]        y_max
);
  always_comb begin
    cls   = '0;
    y_max = y[0];
    for (int l = 1; l < L; l++) begin
      if (signed'(y[l]) > signed'(y_max)) begin
        y_max = y[l];
        cls   = CW'(l);
      end
    end
  end

endmodule
