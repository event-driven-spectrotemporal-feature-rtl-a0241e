// agc: automatic gain control loop of one ear.
//
// The IHC output of every channel is summed in an accumulator (one word per
// channel) during the channel pass of each sample. Four smoothing stages
// follow, updated every 8, 16, 32 and 64 samples: stage 0 takes the mean of
// its 8 accumulated IHC values, each slower stage the mean of two inputs of
// the stage before. When a stage updates, each channel is low-pass filtered
// towards its input plus agc_mix times the state of the next slower stage,
// and the result is smoothed across channels by a 3-tap spatial filter
// (1/4, 1/2, 1/4; edge channels, channel 0 and the last active channel,
// repeat themselves). The stage-0 state is b,
// which the DOHC of the same channel reads to reduce the damping reduction.
//
//   input_k   = acc_k / decim_k                     (decim 8, 2, 2, 2)
//   x         = input_k + mix * state_{k+1}         (no mix term for k = 3)
//   tmp[ch]   = state_k + eps_k * (x - state_k)
//   state_k   = tmp[ch-1]/4 + tmp[ch]/2 + tmp[ch+1]/4
//
// The accumulator, the four LPF stages at 8/16/32/64 samples, the 3-tap
// spatial filter and the output b are those of the architecture figure;
// the recursion order, the mix term and the filter taps follow the
// published CAR-FAC AGC, and are assumptions here.
//
// Timing: start is pulsed once per sample after the channel pass. If no
// stage is due, busy stays low. Otherwise the engine walks the channels one
// per cycle: one pass per due stage to move the averages upwards (slowest
// last), then, from the slowest due stage down to stage 0, one LPF pass and
// one spatial-filter pass, so an update of all four stages takes 12*M
// cycles for M = last + 1 active channels. fired reports, one cycle after
// start, which stages are due.
module agc
  import cochlea_pkg::*;
#(
  parameter int unsigned N_CH = 64,
  localparam int unsigned CHW = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CHW-1:0]        last,   // last active channel
  // accumulate port (DIHC_AGC slot)
  input  logic                  acc_valid,
  input  logic [CHW-1:0]        acc_ch,
  input  fx_t                   acc_in,
  // read port (DOHC slot)
  input  logic [CHW-1:0]        rd_ch,
  output fx_t                   b,
  // update engine
  input  logic                  start,
  output logic                  busy,
  output logic [AGC_STAGES-1:0] fired,
  input  fx_t [AGC_STAGES-1:0]  eps,
  input  fx_t                   mix
);
  typedef enum logic [1:0] {S_IDLE, S_PROP, S_LPF, S_SMOOTH} state_e;

  fx_t acc   [AGC_STAGES][N_CH];
  fx_t inp   [AGC_STAGES][N_CH];
  fx_t st    [AGC_STAGES][N_CH];
  fx_t tmp   [N_CH];

  state_e         state;
  logic [5:0]     phase;     // sample count modulo 64
  logic [1:0]     k;         // current stage
  logic [1:0]     top;       // slowest due stage
  logic [CHW-1:0] ch;

  logic [5:0] phase_nx;
  logic [2:0] n_due;
  always_comb begin
    phase_nx = phase + 6'd1;
    n_due = 3'd0;
    if (phase_nx[2:0] == 3'd0) n_due = 3'd1;
    if (phase_nx[3:0] == 4'd0) n_due = 3'd2;
    if (phase_nx[4:0] == 5'd0) n_due = 3'd3;
    if (phase_nx[5:0] == 6'd0) n_due = 3'd4;
  end

  // datapath of the current (k, ch) step
  fx_t in_k, x_mix, lpf, t_l, t_r, smooth;
  logic last_ch;
  always_comb begin
    last_ch = (ch == last);
    in_k    = (k == 2'd0) ? (acc[k][ch] >>> 3) : (acc[k][ch] >>> 1);
    x_mix   = inp[k][ch];
    if (k != 2'(AGC_STAGES - 1)) x_mix = x_mix + fx_mul(mix, st[k + 2'd1][ch]);
    lpf     = st[k][ch] + fx_mul(eps[k], x_mix - st[k][ch]);
    t_l     = (ch == '0) ? tmp[ch] : tmp[ch - CHW'(1)];
    t_r     = last_ch ? tmp[ch] : tmp[ch + CHW'(1)];
    smooth  = (t_l >>> 2) + (tmp[ch] >>> 1) + (t_r >>> 2);
  end

  assign b    = st[0][rd_ch];
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      phase <= '0;
      k     <= '0;
      top   <= '0;
      ch    <= '0;
      fired <= '0;
      for (int s = 0; s < AGC_STAGES; s++)
        for (int c = 0; c < N_CH; c++) begin
          acc[s][c] <= '0;
          inp[s][c] <= '0;
          st[s][c]  <= '0;
        end
      for (int c = 0; c < N_CH; c++) tmp[c] <= '0;
    end else begin
      fired <= '0;
      if (acc_valid) acc[0][acc_ch] <= acc[0][acc_ch] + acc_in;
      unique case (state)
        S_IDLE: if (start) begin
          phase <= phase_nx;
          for (int s = 0; s < AGC_STAGES; s++) fired[s] <= (n_due > 3'(s));
          if (n_due != 3'd0) begin
            top   <= 2'(n_due - 3'd1);
            k     <= '0;
            ch    <= '0;
            state <= S_PROP;
          end
        end
        S_PROP: begin
          inp[k][ch] <= in_k;
          acc[k][ch] <= '0;
          if (k != 2'(AGC_STAGES - 1)) acc[k + 2'd1][ch] <= acc[k + 2'd1][ch] + in_k;
          ch <= last_ch ? '0 : ch + CHW'(1);
          if (last_ch) begin
            if (k == top) state <= S_LPF;
            else          k <= k + 2'd1;
          end
        end
        S_LPF: begin
          tmp[ch] <= lpf;
          ch <= last_ch ? '0 : ch + CHW'(1);
          if (last_ch) state <= S_SMOOTH;
        end
        S_SMOOTH: begin
          st[k][ch] <= smooth;
          ch <= last_ch ? '0 : ch + CHW'(1);
          if (last_ch) begin
            if (k == '0) state <= S_IDLE;
            else begin
              k     <= k - 2'd1;
              state <= S_LPF;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
