// aer_interface: the interface module of one ear. It turns the spike
// vectors of the LIF slot into address events and buffers them for the host.
//
// Whenever the ear reports a channel slot with at least one spike, one
// aer_event_t word {ear, sample index, channel, spike bit per neuron} is
// written into a DEPTH-word FIFO. The FIFO is read through a valid/ready
// port towards the host link. A slot can produce an event every clock while
// the link may be slower; when the FIFO is full the event is dropped and
// drop_count is incremented (saturating), so that the host can see the loss.
// The ear field of every word is the constant parameter EAR.
//
// The paper names an interface module per ear and a USB path for the spikes
// without describing them; the event format, the FIFO and the drop policy
// are this design's choices.
module aer_interface
  import cochlea_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter bit          EAR   = 1'b0,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            spk_valid,
  input  logic [7:0]      spk_ch,
  input  logic [NLIF-1:0] spk_vec,
  input  logic [22:0]     ts,
  output logic            ev_valid,
  input  logic            ev_ready,
  output aer_event_t      ev,
  output logic [15:0]     drop_count
);
  aer_event_t     mem [DEPTH];
  logic [AW-1:0]  wptr, rptr;
  logic [AW:0]    count;
  logic           push, pop, full;

  assign full     = (count == (AW+1)'(DEPTH));
  assign ev_valid = (count != '0);
  assign ev       = mem[rptr];
  assign pop      = ev_valid && ev_ready;
  assign push     = spk_valid && (spk_vec != '0) && (!full || pop);

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= '{ear: EAR, ts: ts, ch: spk_ch, spikes: spk_vec};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      drop_count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + AW'(1);
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + AW'(1);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      if (spk_valid && (spk_vec != '0) && full && !pop && drop_count != '1)
        drop_count <= drop_count + 16'd1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH))
    else $error("AER FIFO count overflow");
endmodule
