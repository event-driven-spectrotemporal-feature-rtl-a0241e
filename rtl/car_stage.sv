// car_stage: one step of one CAR (cascade of asymmetric resonators) section.
//
// The ear holds one instance and time-multiplexes it over all channels: in
// each channel slot the two resonator state words (W0, W1 memories of the
// figure) and the channel coefficients a0, c0, h, g are read, the pole
// radius r comes from the DOHC, and the section input x_in is the BM output
// of the previous (higher-CF) section in the same sample, or the audio
// sample for the first section.
//
//   z1' = r * (a0*z1 - c0*z2) + x_in
//   z2' = r * (c0*z1 + a0*z2)
//   y   = g * (x_in + h*z2')            BM output, input of the next section
//   v   = y - y_old                     BM velocity, used by the DOHC
//
// The rotation by (a0, c0) scaled by r and the output mix through h and g
// follow the CAR structure of the figure (a0, c0, r, W0, W1, h, g, BM
// memories); the exact ordering of the input addition is taken from the
// published CAR-FAC model. The velocity difference is this design's choice.
// Purely combinational; the ear registers the results at the slot end.
module car_stage
  import cochlea_pkg::*;
(
  input  fx_t x_in,   // cascade input
  input  fx_t z1,     // W0 state
  input  fx_t z2,     // W1 state
  input  fx_t a0,
  input  fx_t c0,
  input  fx_t r,
  input  fx_t h,
  input  fx_t g,
  input  fx_t y_old,  // BM output of this channel in the previous sample
  output fx_t z1_nx,
  output fx_t z2_nx,
  output fx_t y,
  output fx_t v
);
  fx_t rot1, rot2;

  always_comb begin
    rot1  = fx_mul(a0, z1) - fx_mul(c0, z2);
    rot2  = fx_mul(c0, z1) + fx_mul(a0, z2);
    z1_nx = fx_mul(r, rot1) + x_in;
    z2_nx = fx_mul(r, rot2);
    y     = fx_mul(g, x_in + fx_mul(h, z2_nx));
    v     = y - y_old;
  end
endmodule
