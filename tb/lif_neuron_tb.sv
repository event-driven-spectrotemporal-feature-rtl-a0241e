// lif_neuron_tb: drives the nine neurons of a channel with a constant input
// over many time steps, keeping the membrane state in the testbench, and
// compares potential and spikes with eqs. (1)-(3) evaluated in floating
// point. Uses the paper's c_LIF = 1/(20 kHz * 10 ms) and threshold 0.0004
// for the middle group, and that spikes occur at all.
module lif_neuron_tb;
  import cochlea_pkg::*;
  import tb_fx_pkg::*;

  fx_t x, c_lif, v_reset;
  fx_t [NLIF-1:0] v, vth, v_nx;
  logic [NLIF-1:0] spk;
  int checks = 0, failures = 0, spikes = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  lif_neuron #(.N(NLIF)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real rv [NLIF];
    c_lif = to_fx(1.0 / (20000.0 * 0.01));
    v_reset = '0;
    for (int j = 0; j < NLIF; j++) begin
      vth[j] = to_fx(j < 3 ? 0.0002 : (j < 6 ? 0.0004 : 0.0008));
      v[j] = '0;
      rv[j] = 0.0;
    end
    for (int t = 0; t < 3000; t++) begin
      real rx;
      rx = (t < 1500) ? 0.001 : rnd(0.0, 0.003);
      x = to_fx(rx);
      rx = to_r(x);
      #1;
      for (int j = 0; j < NLIF; j++) begin
        real v1;
        bit es;
        v1 = rv[j] + to_r(c_lif) * (rx - rv[j]);
        es = v1 > to_r(vth[j]);
        // skip spike comparison when within rounding distance of the threshold
        if (!near(v1, to_r(vth[j]), 1e-7)) begin
          checks++;
          if (es != spk[j]) begin
            failures++;
            $display("FAIL t=%0d n=%0d spk %0d exp %0d", t, j, spk[j], es);
          end
        end
        checks++;
        if (!spk[j] && !near(to_r(v_nx[j]), v1, 1e-6)) begin
          failures++;
          $display("FAIL t=%0d n=%0d v %f exp %f", t, j, to_r(v_nx[j]), v1);
        end
        if (spk[j] && v_nx[j] != v_reset) begin
          failures++;
          $display("FAIL t=%0d n=%0d not reset", t, j);
        end
        if (spk[j]) spikes++;
        rv[j] = spk[j] ? to_r(v_reset) : to_r(v_nx[j]);
        v[j] = spk[j] ? v_reset : v_nx[j];
      end
      @(posedge clk);
    end
    checks++;
    if (spikes == 0) begin failures++; $display("FAIL no spikes"); end
    $display("spikes=%0d", spikes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
