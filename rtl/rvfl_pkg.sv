// rvfl_pkg: constants and helper functions shared by the density-encoded
// RVFL classifier.
//
// The default sizes are those of the median network of the evaluation:
// K = 16 input features, N = 512 hidden neurons (which is also the length of
// each feature's density code), L = 4 classes, 5-bit integer readout weights.
// The clipping threshold kappa is chosen at run time; the datapath is sized
// for the largest value of the grid search, kappa = 15.
// Input features arrive as unsigned fixed point numbers with FRAC_BITS
// fractional bits and one integer bit, so both 0.0 and 1.0 are exact (this
// format is a choice of this design; the algorithm only says x is in [0,1]).
package rvfl_pkg;

  parameter int unsigned K_DEF         = 16;   // input features
  parameter int unsigned N_DEF         = 512;  // hidden neurons = code length
  parameter int unsigned L_DEF         = 4;    // output neurons (classes)
  parameter int unsigned WOUT_BITS_DEF = 5;    // readout weight width
  parameter int unsigned KAPPA_MAX_DEF = 15;   // largest clipping threshold
  parameter int unsigned FRAC_BITS_DEF = 8;    // feature fraction bits
  parameter int unsigned LANES_DEF     = 8;    // hidden neurons per cycle

  // Width of a signed value that must hold [-m, m].
  function automatic int unsigned sbits(input int unsigned m);
    return $clog2(m + 1) + 1;
  endfunction

  // Width of an unsigned value that must hold [0, m].
  function automatic int unsigned ubits(input int unsigned m);
    return (m < 1) ? 1 : $clog2(m + 1);
  endfunction

endpackage
