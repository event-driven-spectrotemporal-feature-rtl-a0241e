// car_fac_ear_tb: end-to-end test of one ear with N_CH = 8 channels.
//
// The testbench designs a small CAR filter bank (pole frequencies spaced
// geometrically from 6 kHz down to 150 Hz at an assumed 20 kHz sample
// rate), loads it through the coefficient port, feeds a two-tone signal and
// compares, for every sample and channel, the BM output and the spike
// vector of the nine neurons with the bit-exact model of ear_model_pkg.
// It switches the FAC off after 130 samples (linear CAR) and checks that
// the damping then no longer depends on the AGC, lowers the number of active
// channels to 5 after 170 samples, and checks the number of clock cycles
// each sample takes: M + 8, plus 3*M per AGC stage due, for M active channels.
module car_fac_ear_tb;
  import cochlea_pkg::*;
  import tb_fx_pkg::*;
  import ear_model_pkg::*;

  localparam int N = 8;
  localparam int CHW = $clog2(N);
  localparam int SAMPLES = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ear_cfg_t cfg;
  coef_wr_t coef_wr;
  logic enable = 1, sample_valid = 0, busy, overrun, bm_valid, spk_valid;
  fx_t sample = '0, bm_y;
  logic [22:0] ts;
  logic [CHW-1:0] bm_ch, spk_ch;
  logic [NLIF-1:0] spk_vec;
  logic [AGC_STAGES-1:0] agc_fired;

  car_fac_ear #(.N_CH(N)) dut (.*);

  int checks = 0, failures = 0, total_spikes = 0, agc_updates = 0, linear_samples = 0, reduced_samples = 0;
  ear_model mdl;
  fx_t got_y [N];
  logic [NLIF-1:0] got_spk [N];
  bit seen_y [N], seen_spk [N];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (bm_valid)  begin got_y[bm_ch] <= bm_y; seen_y[bm_ch] <= 1'b1; end
    if (spk_valid) begin got_spk[spk_ch] <= spk_vec; seen_spk[spk_ch] <= 1'b1; end
    if (agc_fired != '0) agc_updates++;
  end

  task automatic load(coef_sel_e sel, int ch, int val);
    @(negedge clk);
    coef_wr = '{we: 1'b1, sel: sel, ch: 8'(ch), data: val};
    @(negedge clk);
    coef_wr.we = 1'b0;
  endtask

  initial begin
    coef_wr = '0;
    mdl = new(N, NLIF);
    cfg.fac_en = 1'b1;
    cfg.last_ch = 8'hff;          // more than N: all channels
    cfg.ohc_scale = to_fx(0.1);   cfg.ohc_offset = to_fx(0.04);
    cfg.ihc_ac = to_fx(0.00626);  cfg.ihc_in = to_fx(0.005);
    cfg.ihc_out = to_fx(0.1);     cfg.ihc_lpf = to_fx(0.465);
    cfg.agc_eps[0] = to_fx(0.181); cfg.agc_eps[1] = to_fx(0.095);
    cfg.agc_eps[2] = to_fx(0.049); cfg.agc_eps[3] = to_fx(0.0247);
    cfg.agc_mix = to_fx(0.5);     cfg.li_k = to_fx(0.25);
    cfg.c_lif = to_fx(0.005);     cfg.v_reset = '0;
    for (int j = 0; j < NLIF; j++) cfg.vth[j] = to_fx(0.0004 * (j + 1));
    mdl.fac_en = cfg.fac_en; mdl.scale = cfg.ohc_scale; mdl.offset = cfg.ohc_offset;
    mdl.c_ac = cfg.ihc_ac; mdl.c_in = cfg.ihc_in; mdl.c_out = cfg.ihc_out; mdl.c_lpf = cfg.ihc_lpf;
    for (int k = 0; k < 4; k++) mdl.eps[k] = cfg.agc_eps[k];
    mdl.mix = cfg.agc_mix; mdl.li_k = cfg.li_k; mdl.c_lif = cfg.c_lif; mdl.v_reset = cfg.v_reset;
    for (int j = 0; j < NLIF; j++) mdl.vth[j] = cfg.vth[j];

    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < N; c++) begin
      real f, th, ra0, rc0, rr1, rdrz, rh, rr, rg;
      f = 6000.0 * $pow(150.0 / 6000.0, real'(c) / real'(N - 1));
      th = 2.0 * 3.14159265 * f / 20000.0;
      ra0 = $cos(th); rc0 = $sin(th);
      rr1 = 1.0 - 0.35 * th; rdrz = 0.25 * th; rh = rc0;
      rr = rr1 + 0.5 * rdrz;
      rg = (1.0 - 2.0 * ra0 * rr + rr * rr) / (1.0 - (2.0 * ra0 - rh * rc0) * rr + rr * rr);
      mdl.a0[c] = to_fx(ra0); mdl.c0[c] = to_fx(rc0); mdl.r1[c] = to_fx(rr1);
      mdl.drz[c] = to_fx(rdrz); mdl.h[c] = to_fx(rh); mdl.g[c] = to_fx(rg);
      load(COEF_A0, c, mdl.a0[c]); load(COEF_C0, c, mdl.c0[c]); load(COEF_R1, c, mdl.r1[c]);
      load(COEF_DRZ, c, mdl.drz[c]); load(COEF_H, c, mdl.h[c]); load(COEF_G, c, mdl.g[c]);
    end

    for (int s = 0; s < SAMPLES; s++) begin
      real t;
      int cyc, exp_cyc;
      if (s == 130) begin cfg.fac_en = 1'b0; mdl.fac_en = 1'b0; end
      if (s == 170) begin cfg.last_ch = 8'd4; mdl.n_act = 5; end  // 5 active channels
      if (mdl.n_act < N) reduced_samples++;
      if (!cfg.fac_en) linear_samples++;
      t = real'(s) / 20000.0;
      @(negedge clk);
      for (int c = 0; c < N; c++) begin seen_y[c] = 0; seen_spk[c] = 0; end
      sample = to_fx(0.3 * $sin(2.0 * 3.14159265 * 1000.0 * t) + 0.2 * $sin(2.0 * 3.14159265 * 3000.0 * t));
      sample_valid = 1;
      @(negedge clk);
      sample_valid = 0;
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      mdl.step(sample);
      exp_cyc = mdl.n_act + 7 + 3 * mdl.n_act * mdl.n_due + 1;
      checks++;
      if (cyc != exp_cyc) begin
        failures++;
        $display("FAIL sample %0d took %0d cycles, expected %0d", s, cyc, exp_cyc);
      end
      for (int c = 0; c < N; c++) begin
        if (c >= mdl.n_act) begin
          checks++;
          if (seen_y[c] || seen_spk[c]) begin failures++; $display("FAIL inactive channel %0d ran", c); end
          continue;
        end
        checks += 2;
        if (!seen_y[c] || got_y[c] != mdl.y_out[c]) begin
          failures++;
          if (failures < 20) $display("FAIL s=%0d ch=%0d y=%f exp %f", s, c, to_r(got_y[c]), to_r(mdl.y_out[c]));
        end
        for (int j = 0; j < NLIF; j++) begin
          if (!seen_spk[c] || got_spk[c][j] != mdl.spk_out[c][j]) begin
            failures++;
            if (failures < 20) $display("FAIL s=%0d ch=%0d neuron %0d spike %0d exp %0d", s, c, j, got_spk[c][j], mdl.spk_out[c][j]);
          end
          if (mdl.spk_out[c][j]) total_spikes++;
        end
      end
    end
    checks += 4;
    if (reduced_samples == 0) begin failures++; $display("FAIL reduced channel count not run"); end
    if (total_spikes == 0) begin failures++; $display("FAIL no spikes"); end
    if (agc_updates == 0) begin failures++; $display("FAIL no AGC update"); end
    if (linear_samples == 0) begin failures++; $display("FAIL linear mode not run"); end
    $display("spikes=%0d agc_updates=%0d linear_samples=%0d", total_spikes, agc_updates, linear_samples);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
