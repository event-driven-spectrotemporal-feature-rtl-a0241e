// lif_neuron: the NLIF leaky integrate-and-fire neurons of one channel.
//
// All neurons of a channel receive the same laterally inhibited IHC signal x
// and differ only in their threshold. For each neuron j (eqs. (1)-(3)):
//
//   v1      = v[j] + c_lif * (x - v[j])
//   spk[j]  = v1 > vth[j]
//   v_nx[j] = spk[j] ? v_reset : v1
//
// with c_lif = 1/(fs*tau_LIF). The ear time-multiplexes one instance over
// all channels and keeps the membrane potentials in its LIF memory. The
// update, comparison and reset follow the paper; nine neurons per channel
// is the paper's count. Purely combinational.
module lif_neuron
  import cochlea_pkg::*;
#(
  parameter int unsigned N = NLIF
) (
  input  fx_t         x,
  input  fx_t [N-1:0] v,
  input  fx_t [N-1:0] vth,
  input  fx_t         c_lif,
  input  fx_t         v_reset,
  output fx_t [N-1:0] v_nx,
  output logic [N-1:0] spk
);
  always_comb begin
    for (int j = 0; j < N; j++) begin
      fx_t v1;
      v1      = v[j] + fx_mul(c_lif, x - v[j]);
      spk[j]  = v1 > vth[j];
      v_nx[j] = spk[j] ? v_reset : v1;
    end
  end
endmodule
