// ear_controller: schedules the time-multiplexed work of one ear.
//
// One CAR-FAC datapath serves all N_CH channels of an ear. When an audio
// sample is accepted the controller issues one channel slot per clock,
// channel 0 (highest CF) first and last_ch last (the number of active
// channels can be lowered at run time), so that each CAR section sees the
// output of the section before it in the same sample. The datapath is a
// pipeline of DOHC, CAR, DIHC_AGC and LI/LIF slots (the slot names the
// paper's timing inset prints), channel c+1 entering one clock after
// channel c (own choice: one clock per slot). After the
// last channel the controller waits DRAIN cycles for the pipeline to empty,
// pulses agc_start and waits until the AGC engine is idle; only then is the
// next sample accepted.
//
// Timing: a sample accepted in cycle 0 produces slots in cycles 1..M, with
// M = last_ch + 1 active channels; the ear is busy for M + DRAIN + 2 cycles
// when no AGC stage is due. A sample that
// arrives while the ear is busy is dropped and sets the sticky overrun
// flag; when enable is low (ear switched off) samples are ignored.
// The per-slot pipeline follows the paper; the drain and the serial AGC
// update after the channel pass are this design's choice.
module ear_controller #(
  parameter int unsigned N_CH  = 64,
  parameter int unsigned DRAIN = 5,
  localparam int unsigned CHW = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           enable,
  input  logic [CHW-1:0] last_ch,       // last active channel
  input  logic           sample_valid,
  output logic           sample_accept, // sample latched this cycle
  output logic           slot_valid,
  output logic [CHW-1:0] slot_ch,
  output logic           agc_start,
  input  logic           agc_busy,
  output logic           busy,
  output logic           overrun,
  output logic [22:0]    ts             // index of the sample in progress
);
  typedef enum logic [2:0] {C_IDLE, C_RUN, C_DRAIN, C_AGC, C_WAIT} cstate_e;
  cstate_e state;
  logic [$clog2(DRAIN+1)-1:0] dcnt;

  assign busy          = (state != C_IDLE);
  assign sample_accept = (state == C_IDLE) && enable && sample_valid;
  assign slot_valid    = (state == C_RUN);
  assign agc_start     = (state == C_AGC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= C_IDLE;
      slot_ch <= '0;
      dcnt    <= '0;
      overrun <= 1'b0;
      ts      <= '0;
    end else begin
      if (busy && sample_valid && enable) overrun <= 1'b1;
      unique case (state)
        C_IDLE: if (sample_accept) begin
          state   <= C_RUN;
          slot_ch <= '0;
        end
        C_RUN: begin
          if (slot_ch == last_ch) begin
            state <= C_DRAIN;
            dcnt  <= '0;
          end else slot_ch <= slot_ch + CHW'(1);
        end
        C_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == $bits(dcnt)'(DRAIN - 1)) state <= C_AGC;
        end
        C_AGC:  state <= C_WAIT;
        C_WAIT: if (!agc_busy) begin
          state <= C_IDLE;
          ts    <= ts + 23'd1;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // A slot is only issued inside the channel range.
  assert property (@(posedge clk) disable iff (!rst_n) slot_valid |-> int'(slot_ch) < int'(N_CH))
    else $error("slot channel out of range");
endmodule
