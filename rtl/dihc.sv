// dihc: digital inner hair cell, the detector that turns BM motion into a
// smoothed, rectified and compressed firing-probability signal.
//
// Per channel it keeps four state words (high-pass state, capacitor voltage
// and two smoothing filters) that the ear stores in its IHC memories:
//
//   hp    = y - ac            ac' = ac + c_ac*hp           (HPF)
//   z     = max(hp + 0.13, 0)
//   cond  = z^3 / (z^3 + z^2 + 0.1)                        (rational function)
//   q     = cond * cap
//   cap'  = cap + c_in*(1 - cap) - c_out*q                 (capacitor)
//   l1'   = l1 + c_lpf*(q - l1)
//   l2'   = l2 + c_lpf*(l1' - l2)                          ihc = l2'
//
// The HPF, the offset 0.13 added before the rational function, the constant 1
// feeding the capacitor loop and the chain of low-pass filters into the IHC
// memory are printed in the DIHC part of the architecture figure. The
// constant 0.1 of the rational function and the update rules are those of
// the published CAR-FAC one-capacitor IHC; the figure's three-multiplier
// realisation is replaced by two multipliers and a divider.
// Purely combinational.
module dihc
  import cochlea_pkg::*;
(
  input  fx_t y,       // BM output
  input  fx_t ac,
  input  fx_t cap,
  input  fx_t l1,
  input  fx_t l2,
  input  fx_t c_ac,
  input  fx_t c_in,
  input  fx_t c_out,
  input  fx_t c_lpf,
  output fx_t ac_nx,
  output fx_t cap_nx,
  output fx_t l1_nx,
  output fx_t l2_nx,
  output fx_t ihc      // = l2_nx
);
  localparam fx_t OFFS  = fx_const(0.13);
  localparam fx_t DCONST = fx_const(0.1);

  fx_t hp, z, z2, z3, cond, q;

  always_comb begin
    hp     = y - ac;
    ac_nx  = ac + fx_mul(c_ac, hp);
    z      = hp + OFFS;
    if (z < 0) z = '0;
    z2     = fx_mul(z, z);
    z3     = fx_mul(z2, z);
    cond   = fx_div(z3, z3 + z2 + DCONST);
    q      = fx_mul(cond, cap);
    cap_nx = cap + fx_mul(c_in, FX_ONE - cap) - fx_mul(c_out, q);
    l1_nx  = l1 + fx_mul(c_lpf, q - l1);
    l2_nx  = l2 + fx_mul(c_lpf, l1_nx - l2);
    ihc    = l2_nx;
  end
endmodule
