// agc_tb: runs the AGC with N_CH = 6 for 200 samples of random IHC input
// and compares every channel of every stage's state with a floating-point
// model of the multi-rate loop (accumulate, decimate by 8/2/2/2, mix in the
// slower stage, low-pass, 3-tap spatial smoothing). It checks b through the
// read port after every sample, which stages fire on which sample, and the
// engine's busy time (3*N_CH cycles per due stage).
module agc_tb;
  import cochlea_pkg::*;
  import tb_fx_pkg::*;

  localparam int N = 6;
  localparam int CHW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic acc_valid = 0, start = 0, busy;
  logic [CHW-1:0] acc_ch = '0, rd_ch = '0, last = CHW'(N - 1);
  fx_t acc_in = '0, b, mix;
  fx_t [AGC_STAGES-1:0] eps;
  logic [AGC_STAGES-1:0] fired;

  agc #(.N_CH(N)) dut (.*);

  int checks = 0, failures = 0;
  int fire_count [AGC_STAGES];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real acc_m [AGC_STAGES][N], inp_m [AGC_STAGES][N], st_m [AGC_STAGES][N], tmp_m [N];
  real reps [AGC_STAGES];
  real rmix;

  task automatic model_update(int phase);
    int n_due;
    n_due = 0;
    if (phase % 8 == 0) n_due = 1;
    if (phase % 16 == 0) n_due = 2;
    if (phase % 32 == 0) n_due = 3;
    if (phase % 64 == 0) n_due = 4;
    for (int k = 0; k < n_due; k++)
      for (int c = 0; c < N; c++) begin
        inp_m[k][c] = acc_m[k][c] / (k == 0 ? 8.0 : 2.0);
        acc_m[k][c] = 0.0;
        if (k < AGC_STAGES - 1) acc_m[k+1][c] += inp_m[k][c];
      end
    for (int k = n_due - 1; k >= 0; k--) begin
      for (int c = 0; c < N; c++) begin
        real x;
        x = inp_m[k][c];
        if (k < AGC_STAGES - 1) x += rmix * st_m[k+1][c];
        tmp_m[c] = st_m[k][c] + reps[k] * (x - st_m[k][c]);
      end
      for (int c = 0; c < N; c++) begin
        real l, r;
        l = (c == 0) ? tmp_m[c] : tmp_m[c-1];
        r = (c == N-1) ? tmp_m[c] : tmp_m[c+1];
        st_m[k][c] = 0.25 * l + 0.5 * tmp_m[c] + 0.25 * r;
      end
    end
  endtask

  initial begin
    eps[0] = to_fx(0.181); eps[1] = to_fx(0.095); eps[2] = to_fx(0.049); eps[3] = to_fx(0.0247);
    mix = to_fx(0.5);
    for (int k = 0; k < AGC_STAGES; k++) begin
      reps[k] = to_r(eps[k]);
      fire_count[k] = 0;
      for (int c = 0; c < N; c++) begin acc_m[k][c] = 0; inp_m[k][c] = 0; st_m[k][c] = 0; end
    end
    rmix = to_r(mix);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int s = 1; s <= 200; s++) begin
      int cyc, expect_cyc, n_due;
      // channel pass: accumulate one IHC value per channel
      for (int c = 0; c < N; c++) begin
        real x;
        x = rnd(0.0, 0.5) * (1.0 + c);
        @(negedge clk);
        acc_valid = 1; acc_ch = CHW'(c); acc_in = to_fx(x);
        acc_m[0][c] += to_r(acc_in);
      end
      @(negedge clk);
      acc_valid = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      n_due = (s % 64 == 0) ? 4 : (s % 32 == 0) ? 3 : (s % 16 == 0) ? 2 : (s % 8 == 0) ? 1 : 0;
      checks++;
      for (int k = 0; k < AGC_STAGES; k++) begin
        if (fired[k] != (k < n_due)) begin
          failures++;
          $display("FAIL sample %0d stage %0d fired=%0d", s, k, fired[k]);
        end
        if (fired[k]) fire_count[k]++;
      end
      cyc = 0;
      while (busy) begin @(negedge clk); cyc++; end
      expect_cyc = 3 * N * n_due;
      checks++;
      if (cyc != expect_cyc) begin
        failures++;
        $display("FAIL sample %0d busy %0d cycles, expected %0d", s, cyc, expect_cyc);
      end
      model_update(s);
      for (int c = 0; c < N; c++) begin
        rd_ch = CHW'(c);
        #1;
        checks++;
        if (!near(to_r(b), st_m[0][c], 1e-5)) begin
          failures++;
          $display("FAIL sample %0d ch %0d b=%f exp %f", s, c, to_r(b), st_m[0][c]);
        end
      end
      if (s % 64 == 0)
        for (int k = 1; k < AGC_STAGES; k++)
          for (int c = 0; c < N; c++) begin
            checks++;
            if (!near(to_r(dut.st[k][c]), st_m[k][c], 1e-5)) begin
              failures++;
              $display("FAIL stage %0d ch %0d", k, c);
            end
          end
    end
    for (int k = 0; k < AGC_STAGES; k++) begin
      checks++;
      if (fire_count[k] == 0) begin failures++; $display("FAIL stage %0d never updated", k); end
    end
    $display("stage updates: %0d %0d %0d %0d", fire_count[0], fire_count[1], fire_count[2], fire_count[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
