// cochlea_pkg: types and arithmetic shared by the binaural CAR-FAC cochlea.
//
// Every signal of the cochlea datapath is a signed fixed-point word fx_t of
// FX_W bits with FX_FRAC fraction bits (Q7.24 by default: range about +-128,
// resolution 6e-8, fine enough for the 0.0004 spike threshold). The paper
// gives no word length; this format is a choice of this design. fx_mul
// truncates the product towards minus infinity; fx_div is a plain
// combinational fixed-point divider used by the two rational functions
// (OHC and IHC nonlinearities).
//
// The package also holds the host-visible configuration record (ear_cfg_t),
// the coefficient-memory selector, the address map of the parameter-write
// port and the address-event word sent back to the host.
package cochlea_pkg;

  parameter int unsigned FX_W    = 32;
  parameter int unsigned FX_FRAC = 24;
  // LIF neurons per channel: "Each DIHC is connected to nine LIF neurons".
  parameter int unsigned NLIF    = 9;
  // AGC stages: four LPF stages updated every 8, 16, 32 and 64 samples.
  parameter int unsigned AGC_STAGES = 4;

  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_ONE  = fx_t'(1) <<< FX_FRAC;

  // Convert a real constant to fixed point (elaboration time only).
  function automatic fx_t fx_const(real r);
    return fx_t'($rtoi(r * real'(64'(1) << FX_FRAC)));
  endfunction

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FX_FRAC);
  endfunction

  // num / den for den > 0; returns the largest value when den <= 0.
  function automatic fx_t fx_div(fx_t num, fx_t den);
    logic signed [2*FX_W-1:0] n, q;
    if (den <= 0) return {1'b0, {(FX_W-1){1'b1}}};
    n = 64'(num) <<< FX_FRAC;
    q = n / 64'(den);
    return fx_t'(q);
  endfunction

  // Per-channel coefficient memories of the CAR and DOHC (Fig. 2).
  typedef enum logic [3:0] {
    COEF_A0  = 4'd0,
    COEF_C0  = 4'd1,
    COEF_R1  = 4'd2,
    COEF_H   = 4'd3,
    COEF_G   = 4'd4,
    COEF_DRZ = 4'd5
  } coef_sel_e;

  // One coefficient write, routed from the host port to an ear.
  typedef struct packed {
    logic       we;
    coef_sel_e  sel;
    logic [7:0] ch;
    fx_t        data;
  } coef_wr_t;

  // Parameters shared by all channels of both ears.
  typedef struct packed {
    logic                        fac_en;     // 0: linear CAR, r = r1
    logic [7:0]                  last_ch;    // number of active channels - 1
    fx_t                         ohc_scale;  // OHC velocity scale
    fx_t                         ohc_offset; // OHC velocity offset
    fx_t                         ihc_ac;     // IHC high-pass coefficient
    fx_t                         ihc_in;     // IHC capacitor recharge rate
    fx_t                         ihc_out;    // IHC capacitor depletion rate
    fx_t                         ihc_lpf;    // IHC output smoothing coefficient
    fx_t [AGC_STAGES-1:0]        agc_eps;    // AGC LPF coefficient per stage
    fx_t                         agc_mix;    // gain of the slower stage into a faster one
    fx_t                         li_k;       // lateral inhibition strength
    fx_t                         c_lif;      // c_LIF of eq. (2)
    fx_t                         v_reset;    // V_reset of eq. (3)
    fx_t [NLIF-1:0]              vth;        // threshold of each LIF neuron
  } ear_cfg_t;

  // Host parameter-write address map (16-bit word address):
  //   [15:12] region : 0 ear 0 coefficients, 1 ear 1 coefficients, 2 registers
  //   coefficients   : [11:8] coef_sel_e, [7:0] channel
  //   registers      : [7:0] index, see REG_* below
  localparam logic [3:0] REGION_EAR0 = 4'd0;
  localparam logic [3:0] REGION_EAR1 = 4'd1;
  localparam logic [3:0] REGION_REGS = 4'd2;

  localparam logic [7:0] REG_CTRL       = 8'd0;  // [0] ear0 on [1] ear1 on [2] FAC on [3] host audio
  localparam logic [7:0] REG_OHC_SCALE  = 8'd1;
  localparam logic [7:0] REG_OHC_OFFSET = 8'd2;
  localparam logic [7:0] REG_IHC_AC     = 8'd3;
  localparam logic [7:0] REG_IHC_IN     = 8'd4;
  localparam logic [7:0] REG_IHC_OUT    = 8'd5;
  localparam logic [7:0] REG_IHC_LPF    = 8'd6;
  localparam logic [7:0] REG_LAST_CH    = 8'd7;  // active channels - 1
  localparam logic [7:0] REG_AGC_EPS0   = 8'd8;  // 8..11
  localparam logic [7:0] REG_AGC_MIX    = 8'd12;
  localparam logic [7:0] REG_LI_K       = 8'd13;
  localparam logic [7:0] REG_C_LIF      = 8'd14;
  localparam logic [7:0] REG_V_RESET    = 8'd15;
  localparam logic [7:0] REG_VTH0       = 8'd16; // 16..24

  // Address event: all spikes of one channel of one ear in one sample.
  typedef struct packed {
    logic            ear;
    logic [22:0]     ts;      // sample index
    logic [7:0]      ch;
    logic [NLIF-1:0] spikes;  // one bit per LIF neuron
  } aer_event_t;

endpackage
