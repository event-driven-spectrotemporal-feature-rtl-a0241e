// dohc: digital outer hair cell, the nonlinear damping control of the CAR.
//
// The pole radius of a CAR section is raised above its minimum r1 by an
// amount d_rz that is reduced by the AGC output b and by a bell-shaped
// nonlinearity of the BM velocity v:
//
//   u   = scale*v + offset
//   nlf = 1 / (1 + u*u)
//   r   = r1 + d_rz * (1 - b) * nlf          when the FAC is on
//   r   = r1                                   when the FAC is off (linear CAR)
//
// The inputs scale, offset, 1, b, d_rz and r1 and the product chain are those
// printed in the DOHC part of the architecture figure. The figure draws the
// nonlinearity as a block with three multipliers but does not give its
// formula; here it is the rational function of the published CAR-FAC model,
// computed with one multiplier and a divider. Purely combinational.
module dohc
  import cochlea_pkg::*;
(
  input  logic fac_en,
  input  fx_t  v,       // BM velocity
  input  fx_t  b,       // AGC output of this channel
  input  fx_t  r1,
  input  fx_t  d_rz,
  input  fx_t  scale,
  input  fx_t  offset,
  output fx_t  r
);
  fx_t u, nlf, damp;

  always_comb begin
    u    = fx_mul(scale, v) + offset;
    nlf  = fx_div(FX_ONE, FX_ONE + fx_mul(u, u));
    damp = fx_mul(fx_mul(d_rz, FX_ONE - b), nlf);
    r    = fac_en ? r1 + damp : r1;
  end
endmodule
