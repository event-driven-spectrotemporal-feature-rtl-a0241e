// sync_control: the synchronisation and control block between the host
// link, the audio codec and the two ears.
//
// It decodes parameter writes arriving from the host (a 16-bit word address
// and a 32-bit word, see the address map in cochlea_pkg): per-channel
// coefficient writes are forwarded to the addressed ear one cycle later,
// register writes update the shared configuration record cfg (including
// the number of active channels) and the control register (ear 0 on, ear 1
// on, FAC on, audio source). It also selects the audio source, either the
// codec's line input or a stereo stream sent by the host (an audio file),
// converts the 16-bit PCM words to the fixed-point format (full scale =
// +-1.0) and issues one sample strobe per stereo sample to both ears. The
// low FX_FRAC-15 bits of sample_l and sample_r are therefore always zero.
//
// The blocks "Synchronisation" and "Control", the parameter path from the
// PC, the audio file path and the codec line input are those of the
// architecture figure; the paper does not describe their insides, so the
// address map, the register set and the reset values are this design's
// choices. Reset values assume a 20 kHz sample rate (the rate of the
// speech corpus used with the system): c_LIF = 1/(20 kHz * 10 ms) and the
// medium threshold 0.0004 are the paper's; the low and high thresholds and
// the filter coefficients are assumed and can be overwritten by the host.
module sync_control
  import cochlea_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // host parameter port
  input  logic               host_wr_valid,
  input  logic [15:0]        host_wr_addr,
  input  logic [31:0]        host_wr_data,
  // audio sources
  input  logic               codec_valid,
  input  logic signed [15:0] codec_l,
  input  logic signed [15:0] codec_r,
  input  logic               host_audio_valid,
  input  logic signed [15:0] host_l,
  input  logic signed [15:0] host_r,
  // to the ears
  output ear_cfg_t           cfg,
  output logic               ear0_en,
  output logic               ear1_en,
  output coef_wr_t           coef_wr0,
  output coef_wr_t           coef_wr1,
  output logic               sample_valid,
  output fx_t                sample_l,
  output fx_t                sample_r
);
  logic host_src;

  function automatic ear_cfg_t cfg_default();
    ear_cfg_t c;
    c.fac_en     = 1'b1;
    c.last_ch    = 8'hff;   // all channels the ears have
    c.ohc_scale  = fx_const(0.1);
    c.ohc_offset = fx_const(0.04);
    c.ihc_ac     = fx_const(0.00626);
    c.ihc_in     = fx_const(0.005);
    c.ihc_out    = fx_const(0.1);
    c.ihc_lpf    = fx_const(0.465);
    c.agc_eps[0] = fx_const(0.181);
    c.agc_eps[1] = fx_const(0.095);
    c.agc_eps[2] = fx_const(0.049);
    c.agc_eps[3] = fx_const(0.0247);
    c.agc_mix    = fx_const(0.5);
    c.li_k       = fx_const(0.25);
    c.c_lif      = fx_const(0.005);
    c.v_reset    = '0;
    for (int j = 0; j < NLIF; j++)
      c.vth[j] = (j < NLIF/3)   ? fx_const(0.0002) :
                 (j < 2*NLIF/3) ? fx_const(0.0004) : fx_const(0.0008);
    return c;
  endfunction

  logic [3:0] region;
  logic [7:0] idx;
  assign region = host_wr_addr[15:12];
  assign idx    = host_wr_addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg      <= cfg_default();
      ear0_en  <= 1'b1;
      ear1_en  <= 1'b1;
      host_src <= 1'b0;
      coef_wr0 <= '0;
      coef_wr1 <= '0;
    end else begin
      coef_wr0.we <= 1'b0;
      coef_wr1.we <= 1'b0;
      if (host_wr_valid) begin
        if (region == REGION_EAR0 || region == REGION_EAR1) begin
          coef_wr_t w;
          w.we   = 1'b1;
          w.sel  = coef_sel_e'(host_wr_addr[11:8]);
          w.ch   = idx;
          w.data = fx_t'(host_wr_data);
          if (region == REGION_EAR0) coef_wr0 <= w;
          else                       coef_wr1 <= w;
        end else if (region == REGION_REGS) begin
          case (idx)
            REG_CTRL: begin
              ear0_en    <= host_wr_data[0];
              ear1_en    <= host_wr_data[1];
              cfg.fac_en <= host_wr_data[2];
              host_src   <= host_wr_data[3];
            end
            REG_OHC_SCALE:  cfg.ohc_scale  <= host_wr_data;
            REG_OHC_OFFSET: cfg.ohc_offset <= host_wr_data;
            REG_IHC_AC:     cfg.ihc_ac     <= host_wr_data;
            REG_IHC_IN:     cfg.ihc_in     <= host_wr_data;
            REG_IHC_OUT:    cfg.ihc_out    <= host_wr_data;
            REG_IHC_LPF:    cfg.ihc_lpf    <= host_wr_data;
            REG_LAST_CH:    cfg.last_ch    <= host_wr_data[7:0];
            REG_AGC_MIX:    cfg.agc_mix    <= host_wr_data;
            REG_LI_K:       cfg.li_k       <= host_wr_data;
            REG_C_LIF:      cfg.c_lif      <= host_wr_data;
            REG_V_RESET:    cfg.v_reset    <= host_wr_data;
            default: begin
              if (idx >= REG_AGC_EPS0 && idx < REG_AGC_EPS0 + 8'(AGC_STAGES))
                cfg.agc_eps[2'(idx - REG_AGC_EPS0)] <= host_wr_data;
              if (idx >= REG_VTH0 && idx < REG_VTH0 + 8'(NLIF))
                cfg.vth[4'(idx - REG_VTH0)] <= host_wr_data;
            end
          endcase
        end
      end
    end
  end

  // audio source selection and PCM to fixed-point conversion
  logic signed [15:0] pcm_l, pcm_r;
  assign pcm_l = host_src ? host_l : codec_l;
  assign pcm_r = host_src ? host_r : codec_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample_valid <= 1'b0;
      sample_l     <= '0;
      sample_r     <= '0;
    end else begin
      sample_valid <= host_src ? host_audio_valid : codec_valid;
      sample_l     <= fx_t'(pcm_l) <<< (FX_FRAC - 15);
      sample_r     <= fx_t'(pcm_r) <<< (FX_FRAC - 15);
    end
  end
endmodule
