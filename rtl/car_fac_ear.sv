// car_fac_ear: one "ear" of the binaural cochlea, an N_CH-channel CAR-FAC
// model followed by lateral inhibition and NLIF LIF neurons per channel.
//
// A single datapath (one DOHC, CAR stage, DIHC, lateral inhibition and LIF
// unit) is time-multiplexed over the channels; the per-channel coefficients
// and states live in memories indexed by channel. For every accepted audio
// sample the ear_controller issues channel slots 0..M-1, one per clock
// (M = cfg.last_ch + 1 active channels, at most N_CH, so the channel
// count can be lowered at run time), which flow through a register pipeline:
//
//   slot cycle   DOHC      r  = f(velocity, AGC b, r1, d_rz)      (S0)
//          +1    CAR       W0, W1, BM memories; cascade from ch-1  (S1)
//          +2    DIHC_AGC  IHC memories; AGC accumulate           (S2)
//          +3    (wait for the right neighbour's IHC value)
//          +4    LI + LIF  LIF memory; spikes registered          (S3)
//
// Channel 0 is the basal (highest CF) end and receives the audio sample;
// channel c receives the BM output of channel c-1 computed one cycle
// earlier. The lateral inhibition of channel c uses the IHC outputs of
// channels c-1 and c+1 of the same sample, which is why a wait slot, not
// among the slot names of the paper's timing inset, precedes the LIF slot.
// After the channel pass the AGC engine updates whatever stages are due.
//
// Interface: coefficients are written through coef_wr (a0, c0, r1, h, g,
// d_rz per channel); the shared parameters come in cfg. Per channel slot the
// ear reports the BM output (bm_*) and, four cycles later, the spike vector
// of that channel (spk_*), together with the sample index ts.
//
// The memories, the stage order and the time multiplexing follow the paper.
// The pipeline depth, the reset values of the states (zero, capacitor
// charged to 1) and the neighbour handling of the edge channels (missing
// neighbour taken as zero) are this design's choices. Coefficient memories
// are not reset: the host must load them before enabling the ear.
module car_fac_ear
  import cochlea_pkg::*;
#(
  parameter int unsigned N_CH = 64,
  localparam int unsigned CHW = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  ear_cfg_t         cfg,
  input  coef_wr_t         coef_wr,
  input  logic             sample_valid,
  input  fx_t              sample,
  output logic             busy,
  output logic             overrun,
  output logic [22:0]      ts,
  output logic             bm_valid,
  output logic [CHW-1:0]   bm_ch,
  output fx_t              bm_y,
  output logic             spk_valid,
  output logic [CHW-1:0]   spk_ch,
  output logic [NLIF-1:0]  spk_vec,
  output logic [AGC_STAGES-1:0] agc_fired
);
  // ---------------- memories ----------------
  fx_t a0_m [N_CH], c0_m [N_CH], r1_m [N_CH], h_m [N_CH], g_m [N_CH], drz_m [N_CH];
  fx_t w0_m [N_CH], w1_m [N_CH], bmy_m [N_CH], bmv_m [N_CH];
  fx_t ac_m [N_CH], cap_m [N_CH], l1_m [N_CH], l2_m [N_CH];
  fx_t [NLIF-1:0] lif_m [N_CH];

  always_ff @(posedge clk) begin
    if (coef_wr.we && coef_wr.ch < 8'(N_CH)) begin
      unique case (coef_wr.sel)
        COEF_A0:  a0_m [CHW'(coef_wr.ch)] <= coef_wr.data;
        COEF_C0:  c0_m [CHW'(coef_wr.ch)] <= coef_wr.data;
        COEF_R1:  r1_m [CHW'(coef_wr.ch)] <= coef_wr.data;
        COEF_H:   h_m  [CHW'(coef_wr.ch)] <= coef_wr.data;
        COEF_G:   g_m  [CHW'(coef_wr.ch)] <= coef_wr.data;
        COEF_DRZ: drz_m[CHW'(coef_wr.ch)] <= coef_wr.data;
        default: ;
      endcase
    end
  end

  // ---------------- controller ----------------
  logic           slot_valid, sample_accept, agc_start, agc_busy;
  logic [CHW-1:0] slot_ch, last_ch;
  fx_t            sample_q;

  // active channels: cfg.last_ch + 1, at most N_CH
  assign last_ch = (int'(cfg.last_ch) >= int'(N_CH)) ? CHW'(N_CH - 1) : CHW'(cfg.last_ch);

  ear_controller #(.N_CH(N_CH)) u_ctrl (
    .clk, .rst_n, .enable, .last_ch, .sample_valid, .sample_accept,
    .slot_valid, .slot_ch, .agc_start, .agc_busy, .busy, .overrun, .ts
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)             sample_q <= '0;
    else if (sample_accept) sample_q <= sample;

  // ---------------- S0: DOHC ----------------
  fx_t b0, r0;
  dohc u_dohc (
    .fac_en(cfg.fac_en), .v(bmv_m[slot_ch]), .b(b0), .r1(r1_m[slot_ch]),
    .d_rz(drz_m[slot_ch]), .scale(cfg.ohc_scale), .offset(cfg.ohc_offset), .r(r0)
  );

  logic           p1_v;
  logic [CHW-1:0] p1_ch;
  fx_t            p1_r;

  // ---------------- S1: CAR ----------------
  fx_t y_chain, x1, z1n, z2n, y1, v1;
  assign x1 = (p1_ch == '0) ? sample_q : y_chain;
  car_stage u_car (
    .x_in(x1), .z1(w0_m[p1_ch]), .z2(w1_m[p1_ch]), .a0(a0_m[p1_ch]), .c0(c0_m[p1_ch]),
    .r(p1_r), .h(h_m[p1_ch]), .g(g_m[p1_ch]), .y_old(bmy_m[p1_ch]),
    .z1_nx(z1n), .z2_nx(z2n), .y(y1), .v(v1)
  );

  logic           p2_v;
  logic [CHW-1:0] p2_ch;
  fx_t            p2_y;

  // ---------------- S2: DIHC + AGC accumulate ----------------
  fx_t ac_n, cap_n, l1_n, l2_n, ihc2;
  dihc u_dihc (
    .y(p2_y), .ac(ac_m[p2_ch]), .cap(cap_m[p2_ch]), .l1(l1_m[p2_ch]), .l2(l2_m[p2_ch]),
    .c_ac(cfg.ihc_ac), .c_in(cfg.ihc_in), .c_out(cfg.ihc_out), .c_lpf(cfg.ihc_lpf),
    .ac_nx(ac_n), .cap_nx(cap_n), .l1_nx(l1_n), .l2_nx(l2_n), .ihc(ihc2)
  );

  agc #(.N_CH(N_CH)) u_agc (
    .clk, .rst_n, .last(last_ch), .acc_valid(p2_v), .acc_ch(p2_ch), .acc_in(ihc2),
    .rd_ch(slot_ch), .b(b0), .start(agc_start), .busy(agc_busy), .fired(agc_fired),
    .eps(cfg.agc_eps), .mix(cfg.agc_mix)
  );

  logic           p3_v, p4_v, p5_v;
  logic [CHW-1:0] p3_ch, p4_ch, p5_ch;
  fx_t            p3_x, p4_x, p5_x;

  // ---------------- S3: lateral inhibition + LIF ----------------
  fx_t            x_l, x_r, x_li;
  fx_t [NLIF-1:0] lif_nx;
  logic [NLIF-1:0] spk_nx;
  always_comb begin
    x_r = (p3_v && p3_ch == p4_ch + CHW'(1)) ? p3_x : '0;
    x_l = (p5_v && p4_ch != '0 && p5_ch == p4_ch - CHW'(1)) ? p5_x : '0;
  end
  lateral_inhibition u_li (.x_c(p4_x), .x_l, .x_r, .li_k(cfg.li_k), .out(x_li));
  lif_neuron #(.N(NLIF)) u_lif (
    .x(x_li), .v(lif_m[p4_ch]), .vth(cfg.vth), .c_lif(cfg.c_lif), .v_reset(cfg.v_reset),
    .v_nx(lif_nx), .spk(spk_nx)
  );

  // ---------------- pipeline registers and state memories ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {p1_v, p2_v, p3_v, p4_v, p5_v} <= '0;
      {p1_ch, p2_ch, p3_ch, p4_ch, p5_ch} <= '0;
      p1_r <= '0; p2_y <= '0; p3_x <= '0; p4_x <= '0; p5_x <= '0;
      y_chain <= '0;
      spk_valid <= 1'b0; spk_ch <= '0; spk_vec <= '0;
      for (int c = 0; c < N_CH; c++) begin
        w0_m[c] <= '0; w1_m[c] <= '0; bmy_m[c] <= '0; bmv_m[c] <= '0;
        ac_m[c] <= '0; cap_m[c] <= FX_ONE; l1_m[c] <= '0; l2_m[c] <= '0;
        lif_m[c] <= '0;
      end
    end else begin
      // S0 -> S1
      p1_v  <= slot_valid;
      p1_ch <= slot_ch;
      p1_r  <= r0;
      // S1
      if (p1_v) begin
        w0_m[p1_ch]  <= z1n;
        w1_m[p1_ch]  <= z2n;
        bmy_m[p1_ch] <= y1;
        bmv_m[p1_ch] <= v1;
        y_chain      <= y1;
      end
      p2_v  <= p1_v;
      p2_ch <= p1_ch;
      p2_y  <= y1;
      // S2
      if (p2_v) begin
        ac_m[p2_ch]  <= ac_n;
        cap_m[p2_ch] <= cap_n;
        l1_m[p2_ch]  <= l1_n;
        l2_m[p2_ch]  <= l2_n;
      end
      p3_v <= p2_v; p3_ch <= p2_ch; p3_x <= ihc2;
      p4_v <= p3_v; p4_ch <= p3_ch; p4_x <= p3_x;
      p5_v <= p4_v; p5_ch <= p4_ch; p5_x <= p4_x;
      // S3
      if (p4_v) lif_m[p4_ch] <= lif_nx;
      spk_valid <= p4_v;
      spk_ch    <= p4_ch;
      spk_vec   <= p4_v ? spk_nx : '0;
    end
  end

  assign bm_valid = p1_v;
  assign bm_ch    = p1_ch;
  assign bm_y     = y1;
endmodule
