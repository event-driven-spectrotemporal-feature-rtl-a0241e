// carfac_binaural_top: event-based binaural cochlea, two CAR-FAC ears with
// lateral inhibition and LIF neurons, turning stereo audio into address
// events for a host computer.
//
// Structure (as in the architecture figure): a synchronisation/control block
// receives parameters and, optionally, audio from the host and samples from
// the audio codec; each of the two ears has one time-multiplexed CAR-FAC
// datapath with its controller (car_fac_ear) and an interface module
// (aer_interface) that queues the ear's spikes as address events. The two
// event queues are merged round-robin onto one valid/ready stream for the
// host link. Either ear can be switched off (single-ear operation) and the
// FAC part can be switched off (linear CAR) through the control register.
//
// The codec and the USB link are outside this design: their signals are
// ports. Timing: one sample strobe per stereo sample; an ear needs
// M + 8 clocks per sample plus 3*M clocks per AGC stage due (all four
// stages every 64th sample), M being the number of active channels (N_CH
// unless lowered through the channel-count register). The clock must let the worst sample finish
// within one sample period: at N_CH = 64 and 20 kHz that is 840 clocks, so
// 16.8 MHz. A strobe that arrives while an ear is still busy is dropped and
// flagged in overrun.
module carfac_binaural_top
  import cochlea_pkg::*;
#(
  parameter int unsigned N_CH       = 64,
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // host parameter writes (over the host link)
  input  logic               host_wr_valid,
  input  logic [15:0]        host_wr_addr,
  input  logic [31:0]        host_wr_data,
  // host audio stream (audio file)
  input  logic               host_audio_valid,
  input  logic signed [15:0] host_l,
  input  logic signed [15:0] host_r,
  // audio codec line input
  input  logic               codec_valid,
  input  logic signed [15:0] codec_l,
  input  logic signed [15:0] codec_r,
  // address events to the host link
  output logic               evt_valid,
  input  logic               evt_ready,
  output aer_event_t         evt,
  // BM output of each ear, one channel per slot (Fig. 1 y1..yN)
  output logic [1:0]         bm_valid,
  output logic [7:0]         bm_ch [2],
  output fx_t                bm_y  [2],
  // status
  output logic [AGC_STAGES-1:0] agc_fired [2],
  output logic [1:0]         busy,
  output logic [1:0]         overrun,
  output logic [15:0]        drop_count0,
  output logic [15:0]        drop_count1
);
  localparam int unsigned CHW = (N_CH > 1) ? $clog2(N_CH) : 1;

  ear_cfg_t cfg;
  coef_wr_t coef_wr [2];
  logic     ear_en [2];
  logic     sample_valid;
  fx_t      sample [2];

  sync_control u_sync (
    .clk, .rst_n, .host_wr_valid, .host_wr_addr, .host_wr_data,
    .codec_valid, .codec_l, .codec_r, .host_audio_valid, .host_l, .host_r,
    .cfg, .ear0_en(ear_en[0]), .ear1_en(ear_en[1]),
    .coef_wr0(coef_wr[0]), .coef_wr1(coef_wr[1]),
    .sample_valid, .sample_l(sample[0]), .sample_r(sample[1])
  );

  logic       ev_valid [2];
  logic       ev_ready [2];
  aer_event_t ev       [2];
  logic [15:0] drops   [2];

  for (genvar e = 0; e < 2; e++) begin : g_ear
    logic                  spk_valid;
    logic [CHW-1:0]        spk_ch;
    logic [NLIF-1:0]       spk_vec;
    logic [22:0]           ts;
    logic [CHW-1:0]        bm_chn;

    car_fac_ear #(.N_CH(N_CH)) u_ear (
      .clk, .rst_n, .enable(ear_en[e]), .cfg, .coef_wr(coef_wr[e]),
      .sample_valid, .sample(sample[e]), .busy(busy[e]), .overrun(overrun[e]), .ts,
      .bm_valid(bm_valid[e]), .bm_ch(bm_chn), .bm_y(bm_y[e]), .spk_valid, .spk_ch, .spk_vec,
      .agc_fired(agc_fired[e])
    );

    assign bm_ch[e] = 8'(bm_chn);

    aer_interface #(.DEPTH(FIFO_DEPTH), .EAR(e[0])) u_aer (
      .clk, .rst_n, .spk_valid, .spk_ch(8'(spk_ch)), .spk_vec, .ts,
      .ev_valid(ev_valid[e]), .ev_ready(ev_ready[e]), .ev(ev[e]), .drop_count(drops[e])
    );
  end

  assign drop_count0 = drops[0];
  assign drop_count1 = drops[1];

  // round-robin merge of the two event queues onto the host link
  logic last;   // ear granted last
  logic sel;
  always_comb begin
    if (ev_valid[0] && ev_valid[1]) sel = ~last;
    else                            sel = ev_valid[1];
    evt_valid   = ev_valid[0] || ev_valid[1];
    evt         = ev[sel];
    ev_ready[0] = evt_ready && (sel == 1'b0);
    ev_ready[1] = evt_ready && (sel == 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                      last <= 1'b1;
    else if (evt_valid && evt_ready) last <= sel;

  // the stream must hold its word while the link stalls
  assert property (@(posedge clk) disable iff (!rst_n)
                   evt_valid && !evt_ready |=> evt_valid)
    else $error("event stream dropped valid while stalled");
endmodule
