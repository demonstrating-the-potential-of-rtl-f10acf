// lms_pkg: number formats and shared types of the adaptive LMS readout filter.
//
// All sample streams (x, d, y, e) carry signed 16-bit fixed point with 14
// fractional bits (Q2.14, range -2.0 .. +2.0). The learning rate mu is also
// Q2.14. The x*e product is 32 bits with 28 fractional bits, the mu*x*e
// product and the stored weights are 48 bits with 42 fractional bits
// (Q6.42). These widths are the ones the LMS pipeline is drawn with. The
// filter holds up to 64 taps; a 6-bit "taps" value gives the index of the
// last active tap, so taps = 63 selects all 64.
package lms_pkg;

  localparam int unsigned X_W       = 16;  // x, d, y, e sample width
  localparam int unsigned X_FRAC    = 14;  // fractional bits of a sample
  localparam int unsigned MU_W      = 16;  // learning-rate width
  localparam int unsigned MU_FRAC   = 14;
  localparam int unsigned PROD_W    = X_W + X_W;      // 32: x*e
  localparam int unsigned PROD_FRAC = X_FRAC + X_FRAC; // 28
  localparam int unsigned W_W       = PROD_W + MU_W;  // 48: mu*x*e, weights
  localparam int unsigned W_FRAC    = PROD_FRAC + MU_FRAC; // 42
  localparam int unsigned MAX_TAPS  = 64;
  localparam int unsigned TAP_W     = $clog2(MAX_TAPS); // 6

  typedef logic signed [X_W-1:0]    sample_t;
  typedef logic signed [MU_W-1:0]   mu_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [W_W-1:0]    weight_t;
  typedef logic [TAP_W-1:0]         tap_idx_t;

  // Saturate a wide signed value to a sample.
  function automatic sample_t sat_sample(input logic signed [X_W+1:0] v);
    if (v > $signed({{2{1'b0}}, 1'b0, {(X_W-1){1'b1}}}))
      return sample_t'({1'b0, {(X_W-1){1'b1}}});
    else if (v < $signed({{2{1'b1}}, 1'b1, {(X_W-1){1'b0}}}))
      return sample_t'({1'b1, {(X_W-1){1'b0}}});
    else
      return sample_t'(v[X_W-1:0]);
  endfunction

endpackage
