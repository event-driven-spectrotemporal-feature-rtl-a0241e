// sync_control_tb: checks the reset configuration (paper values c_LIF =
// 1/(20 kHz*10 ms) and medium threshold 0.0004), every register write of
// the address map, routing of coefficient writes to the addressed ear with
// one cycle of delay, and the audio path: codec or host source selected by
// the control register, PCM scaled so that full scale is 1.0.
module sync_control_tb;
  import cochlea_pkg::*;
  import tb_fx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_wr_valid = 0, codec_valid = 0, host_audio_valid = 0;
  logic [15:0] host_wr_addr = '0;
  logic [31:0] host_wr_data = '0;
  logic signed [15:0] codec_l = '0, codec_r = '0, host_l = '0, host_r = '0;
  ear_cfg_t cfg;
  logic ear0_en, ear1_en, sample_valid;
  coef_wr_t coef_wr0, coef_wr1;
  fx_t sample_l, sample_r;

  sync_control dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(logic [15:0] a, logic [31:0] d);
    @(negedge clk);
    host_wr_valid = 1; host_wr_addr = a; host_wr_data = d;
    @(negedge clk);
    host_wr_valid = 0;
  endtask

  function automatic logic [15:0] reg_addr(logic [7:0] idx);
    return {4'd2, 4'd0, idx};
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(near(to_r(cfg.c_lif), 0.005, 1e-7), "reset c_lif");
    check(near(to_r(cfg.vth[4]), 0.0004, 1e-7), "reset medium threshold");
    check(cfg.fac_en && ear0_en && ear1_en, "reset enables");
    check(cfg.v_reset == '0, "reset v_reset");
    check(cfg.last_ch == 8'hff, "reset channel count");
    // register writes
    wr(reg_addr(8'd1), 32'h11); check(cfg.ohc_scale == 32'h11, "scale");
    wr(reg_addr(8'd2), 32'h12); check(cfg.ohc_offset == 32'h12, "offset");
    wr(reg_addr(8'd3), 32'h13); check(cfg.ihc_ac == 32'h13, "ihc_ac");
    wr(reg_addr(8'd4), 32'h14); check(cfg.ihc_in == 32'h14, "ihc_in");
    wr(reg_addr(8'd5), 32'h15); check(cfg.ihc_out == 32'h15, "ihc_out");
    wr(reg_addr(8'd6), 32'h16); check(cfg.ihc_lpf == 32'h16, "ihc_lpf");
    wr(reg_addr(8'd7), 32'h27); check(cfg.last_ch == 8'h27, "last_ch");
    for (int k = 0; k < AGC_STAGES; k++) begin
      wr(reg_addr(8'(8 + k)), 32'(100 + k));
      check(cfg.agc_eps[k] == 32'(100 + k), $sformatf("eps %0d", k));
    end
    wr(reg_addr(8'd12), 32'h1c); check(cfg.agc_mix == 32'h1c, "mix");
    wr(reg_addr(8'd13), 32'h1d); check(cfg.li_k == 32'h1d, "li_k");
    wr(reg_addr(8'd14), 32'h1e); check(cfg.c_lif == 32'h1e, "c_lif");
    wr(reg_addr(8'd15), 32'h1f); check(cfg.v_reset == 32'h1f, "v_reset");
    for (int j = 0; j < NLIF; j++) begin
      wr(reg_addr(8'(16 + j)), 32'(200 + j));
      check(cfg.vth[j] == 32'(200 + j), $sformatf("vth %0d", j));
    end
    // coefficient routing
    @(negedge clk);
    host_wr_valid = 1; host_wr_addr = {4'd1, 4'd4, 8'd37}; host_wr_data = 32'hdeadbeef;
    @(negedge clk);
    host_wr_valid = 0;
    check(coef_wr1.we && !coef_wr0.we && coef_wr1.sel == COEF_G && coef_wr1.ch == 8'd37 &&
          coef_wr1.data == 32'hdeadbeef, "coef write to ear 1");
    @(negedge clk);
    check(!coef_wr1.we, "coef write one cycle");
    @(negedge clk);
    host_wr_valid = 1; host_wr_addr = {4'd0, 4'd2, 8'd5}; host_wr_data = 32'h01020304;
    @(negedge clk);
    host_wr_valid = 0;
    check(coef_wr0.we && !coef_wr1.we && coef_wr0.sel == COEF_R1 && coef_wr0.ch == 8'd5, "coef write to ear 0");
    // audio from the codec
    @(negedge clk);
    codec_valid = 1; codec_l = 16'sh4000; codec_r = -16'sd16384;
    host_audio_valid = 1; host_l = 16'sd100; host_r = 16'sd200;
    @(negedge clk);
    codec_valid = 0; host_audio_valid = 0;
    check(sample_valid && near(to_r(sample_l), 0.5, 1e-6) && near(to_r(sample_r), -0.5, 1e-6), "codec sample");
    // switch to host audio, ear 1 off, FAC off
    wr(reg_addr(8'd0), 32'b1001);
    check(ear0_en && !ear1_en && !cfg.fac_en, "control register");
    @(negedge clk);
    codec_valid = 1; codec_l = 16'sd1;
    @(negedge clk);
    codec_valid = 0;
    check(!sample_valid, "codec ignored in host mode");
    host_audio_valid = 1; host_l = -16'sd32768; host_r = 16'sd8192;
    @(negedge clk);
    host_audio_valid = 0;
    check(sample_valid && near(to_r(sample_l), -1.0, 1e-6) && near(to_r(sample_r), 0.25, 1e-6), "host sample");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
