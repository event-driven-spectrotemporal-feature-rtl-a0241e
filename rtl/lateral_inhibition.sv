// lateral_inhibition: sharpens the IHC profile across channels before the
// LIF neurons.
//
// Each channel's IHC output is reduced by a fraction li_k of the mean of its
// two neighbours' outputs in the same sample and clipped at zero:
//
//   out = max(x_c - li_k * (x_l + x_r)/2, 0)
//
// A neighbour that does not exist (edge channels) is given as zero by the
// caller. The paper only names lateral inhibition "between neighbouring
// channels"; the subtractive form, its strength li_k and the clipping are
// choices of this design. Purely combinational.
module lateral_inhibition
  import cochlea_pkg::*;
(
  input  fx_t x_c,
  input  fx_t x_l,
  input  fx_t x_r,
  input  fx_t li_k,
  output fx_t out
);
  fx_t d;
  always_comb begin
    d   = x_c - fx_mul(li_k, (x_l + x_r) >>> 1);
    out = (d < 0) ? '0 : d;
  end
endmodule
