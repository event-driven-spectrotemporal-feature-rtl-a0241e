// carfac_binaural_top_tb: end-to-end test of the binaural system at its
// default size: 64 channels per ear, nine neurons per channel, 64-word
// event queues.
//
// Everything is configured through the host write port: the CAR filter
// banks of both ears (ear 1 slightly detuned from ear 0) and every shared
// register. Stereo audio is then sent from the codec port and, later, from
// the host audio port. Each ear is mirrored by a bit-exact ear_model; the
// testbench compares every BM output of both ears and checks the event
// stream: per ear, the received events must be the model's events in order
// with only dropped ones missing, and the number missing must equal the
// ear's drop counter.
//
// Phases: normal binaural run; a sample strobe sent while the ears are busy
// (overrun, sample ignored); a stalled host link (event queue overflow);
// FAC switched off (linear CAR); ear 1 switched off (single-ear mode, no
// ear-1 output at all); audio from the host instead of the codec; the
// number of active channels lowered to 40. Each of
// these, the AGC updates and the round-robin arbitration between the ears
// must have happened at least once.
module carfac_binaural_top_tb;
  import cochlea_pkg::*;
  import tb_fx_pkg::*;
  import ear_model_pkg::*;

  localparam int N = 64;   // the design default
  localparam int SAMPLES = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_wr_valid = 0, host_audio_valid = 0, codec_valid = 0, evt_ready = 1, evt_valid;
  logic [15:0] host_wr_addr = '0;
  logic [31:0] host_wr_data = '0;
  logic signed [15:0] host_l = '0, host_r = '0, codec_l = '0, codec_r = '0;
  aer_event_t evt;
  logic [1:0] bm_valid, busy, overrun;
  logic [7:0] bm_ch [2];
  fx_t bm_y [2];
  logic [AGC_STAGES-1:0] agc_fired [2];
  logic [15:0] drop_count0, drop_count1;

  carfac_binaural_top dut (.*);

  int checks = 0, failures = 0;
  int n_agc = 0, n_overrun = 0, n_drop = 0, n_linear = 0, n_single = 0, n_host = 0, n_contend = 0, n_reduced = 0;
  int n_events [2] = '{0, 0};
  ear_model mdl [2];
  int ts_m [2] = '{0, 0};
  aer_event_t exp_q [2][$];
  int skipped [2] = '{0, 0};
  fx_t got_y [2][N];
  bit seen_y [2][N];
  int stray_bm = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitors
  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < 2; e++) begin
      if (bm_valid[e]) begin got_y[e][bm_ch[e][5:0]] <= bm_y[e]; seen_y[e][bm_ch[e][5:0]] <= 1'b1; end
      if (agc_fired[e] != '0) n_agc++;
    end
    if (dut.ev_valid[0] && dut.ev_valid[1]) n_contend++;
    if (evt_valid && evt_ready) begin
      int e;
      e = int'(evt.ear);
      n_events[e]++;
      // skip the model's events that were dropped
      while (exp_q[e].size() > 0 && exp_q[e][0] != evt) begin
        void'(exp_q[e].pop_front());
        skipped[e]++;
      end
      checks++;
      if (exp_q[e].size() == 0) begin
        failures++;
        $display("FAIL unexpected event ear %0d ts %0d ch %0d", e, evt.ts, evt.ch);
      end else void'(exp_q[e].pop_front());
    end
  end

  task automatic hw(logic [15:0] a, logic [31:0] d);
    @(negedge clk);
    host_wr_valid = 1; host_wr_addr = a; host_wr_data = d;
    @(negedge clk);
    host_wr_valid = 0;
  endtask

  task automatic set_reg(logic [7:0] idx, int val);
    hw({4'd2, 4'd0, idx}, val);
  endtask

  task automatic set_ctrl(bit e0, bit e1, bit fac, bit host);
    hw({4'd2, 4'd0, 8'd0}, {28'd0, host, fac, e1, e0});
    for (int e = 0; e < 2; e++) mdl[e].fac_en = fac;
  endtask

  initial begin
    bit e_on [2];
    bit host_src;
    for (int e = 0; e < 2; e++) begin
      mdl[e] = new(N, NLIF);
      mdl[e].design_bank(20000.0, e == 0 ? 6000.0 : 5500.0, 150.0);
      mdl[e].fac_en = 1;
      mdl[e].scale = to_fx(0.1); mdl[e].offset = to_fx(0.04);
      mdl[e].c_ac = to_fx(0.00626); mdl[e].c_in = to_fx(0.005);
      mdl[e].c_out = to_fx(0.1); mdl[e].c_lpf = to_fx(0.465);
      mdl[e].eps = '{to_fx(0.181), to_fx(0.095), to_fx(0.049), to_fx(0.0247)};
      mdl[e].mix = to_fx(0.5); mdl[e].li_k = to_fx(0.25);
      mdl[e].c_lif = to_fx(0.005); mdl[e].v_reset = 0;
      for (int j = 0; j < NLIF; j++) mdl[e].vth[j] = to_fx(0.0005 * (j + 1));
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // configuration through the host port
    for (int e = 0; e < 2; e++)
      for (int c = 0; c < N; c++) begin
        hw({4'(e), 4'd0, 8'(c)}, mdl[e].a0[c]);
        hw({4'(e), 4'd1, 8'(c)}, mdl[e].c0[c]);
        hw({4'(e), 4'd2, 8'(c)}, mdl[e].r1[c]);
        hw({4'(e), 4'd3, 8'(c)}, mdl[e].h[c]);
        hw({4'(e), 4'd4, 8'(c)}, mdl[e].g[c]);
        hw({4'(e), 4'd5, 8'(c)}, mdl[e].drz[c]);
      end
    set_reg(8'd1, mdl[0].scale);  set_reg(8'd2, mdl[0].offset);
    set_reg(8'd3, mdl[0].c_ac);   set_reg(8'd4, mdl[0].c_in);
    set_reg(8'd5, mdl[0].c_out);  set_reg(8'd6, mdl[0].c_lpf);
    for (int k = 0; k < 4; k++) set_reg(8'(8 + k), mdl[0].eps[k]);
    set_reg(8'd12, mdl[0].mix);   set_reg(8'd13, mdl[0].li_k);
    set_reg(8'd14, mdl[0].c_lif); set_reg(8'd15, mdl[0].v_reset);
    for (int j = 0; j < NLIF; j++) set_reg(8'(16 + j), mdl[0].vth[j]);
    e_on = '{1, 1};
    host_src = 0;
    set_ctrl(1, 1, 1, 0);

    for (int s = 0; s < SAMPLES; s++) begin
      real t;
      logic signed [15:0] pl, pr;
      if (s == 100) set_ctrl(1, 1, 0, 0);                           // linear CAR
      if (s == 130) begin set_ctrl(1, 0, 1, 0); e_on[1] = 0; end    // single ear
      if (s == 160) begin set_ctrl(1, 1, 1, 1); e_on[1] = 1; host_src = 1; end
      if (s == 180) begin set_reg(8'd7, 39); mdl[0].n_act = 40; mdl[1].n_act = 40; end  // 40 channels
      if (mdl[0].n_act < N) n_reduced++;
      evt_ready = !(s >= 70 && s < 80);                             // stalled host link
      if (!mdl[0].fac_en) n_linear++;
      if (!e_on[1]) n_single++;
      if (host_src) n_host++;
      t = real'(s) / 20000.0;
      pl = 16'($rtoi(12000.0 * $sin(2.0 * 3.14159265 * 900.0 * t) + 6000.0 * $sin(2.0 * 3.14159265 * 2800.0 * t)));
      pr = 16'($rtoi(9000.0 * $sin(2.0 * 3.14159265 * 900.0 * t + 0.7) + 7000.0 * $sin(2.0 * 3.14159265 * 2800.0 * t)));
      // the model runs first so that the expected events are queued before
      // the design emits them
      for (int e = 0; e < 2; e++) begin
        if (!e_on[e]) continue;
        mdl[e].step(fx_t'(e == 0 ? pl : pr) <<< 9);
        for (int c = 0; c < mdl[e].n_act; c++) begin
          bit [NLIF-1:0] v;
          for (int j = 0; j < NLIF; j++) v[j] = mdl[e].spk_out[c][j];
          if (v != '0) exp_q[e].push_back('{ear: e[0], ts: 23'(ts_m[e]), ch: 8'(c), spikes: v});
        end
        ts_m[e]++;
      end
      @(negedge clk);
      for (int e = 0; e < 2; e++) for (int c = 0; c < N; c++) seen_y[e][c] = 0;
      if (host_src) begin host_audio_valid = 1; host_l = pl; host_r = pr; end
      else          begin codec_valid = 1;      codec_l = pl; codec_r = pr; end
      @(negedge clk);
      host_audio_valid = 0; codec_valid = 0;
      repeat (3) @(negedge clk);
      if (s == 20) begin
        // a strobe while the ears are busy must be ignored
        checks++;
        if (busy != 2'b11) begin failures++; $display("FAIL ears not busy"); end
        codec_valid = 1; codec_l = 16'sh7fff; codec_r = 16'sh7fff;
        @(negedge clk);
        codec_valid = 0;
        repeat (2) @(negedge clk);
        n_overrun++;
      end
      while (busy != 2'b00) @(negedge clk);
      for (int e = 0; e < 2; e++) begin
        if (!e_on[e]) begin
          for (int c = 0; c < N; c++) if (seen_y[e][c]) stray_bm++;
          continue;
        end
        for (int c = 0; c < N; c++) begin
          checks++;
          if (c >= mdl[e].n_act) begin
            if (seen_y[e][c]) begin failures++; $display("FAIL inactive channel %0d ran", c); end
            continue;
          end
          if (!seen_y[e][c] || got_y[e][c] != mdl[e].y_out[c]) begin
            failures++;
            if (failures < 20) $display("FAIL ear %0d s=%0d ch=%0d y=%f exp %f", e, s, c,
                                        to_r(got_y[e][c]), to_r(mdl[e].y_out[c]));
          end
        end
      end
    end
    evt_ready = 1;
    repeat (200) @(negedge clk);
    for (int e = 0; e < 2; e++) begin
      checks += 2;
      skipped[e] += exp_q[e].size();
      if (skipped[e] != int'(e == 0 ? drop_count0 : drop_count1)) begin
        failures++;
        $display("FAIL ear %0d missing %0d events, drop counter %0d", e, skipped[e],
                 e == 0 ? drop_count0 : drop_count1);
      end
      if (n_events[e] == 0) begin failures++; $display("FAIL no events from ear %0d", e); end
    end
    n_drop = drop_count0 + drop_count1;
    checks += 2;
    if (overrun != 2'b11) begin failures++; $display("FAIL overrun not flagged"); end
    if (stray_bm != 0) begin failures++; $display("FAIL switched-off ear produced output"); end
    // every mechanism must have happened
    checks += 8;
    if (n_reduced == 0) begin failures++; $display("FAIL no reduced channel count"); end
    if (n_agc == 0)     begin failures++; $display("FAIL no AGC update"); end
    if (n_overrun == 0) begin failures++; $display("FAIL no overrun"); end
    if (n_drop == 0)    begin failures++; $display("FAIL no queue overflow"); end
    if (n_linear == 0)  begin failures++; $display("FAIL no linear mode"); end
    if (n_single == 0)  begin failures++; $display("FAIL no single-ear mode"); end
    if (n_host == 0)    begin failures++; $display("FAIL no host audio"); end
    if (n_contend == 0) begin failures++; $display("FAIL no arbitration between ears"); end
    $display("events ear0=%0d ear1=%0d drops=%0d agc=%0d overrun=%0d linear=%0d single=%0d host=%0d contention=%0d reduced=%0d",
             n_events[0], n_events[1], n_drop, n_agc, n_overrun, n_linear, n_single, n_host, n_contend, n_reduced);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
