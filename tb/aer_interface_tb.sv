// aer_interface_tb: feeds random spike vectors (some empty) into the
// interface with a small FIFO (DEPTH = 8) while the host side accepts words
// at random, compares every word read with a queue kept by the testbench,
// counts the events that must have been dropped while the FIFO was full and
// checks drop_count against that number.
module aer_interface_tb;
  import cochlea_pkg::*;

  localparam int D = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic spk_valid = 0, ev_valid, ev_ready = 0;
  logic [7:0] spk_ch = '0;
  logic [NLIF-1:0] spk_vec = '0;
  logic [22:0] ts = '0;
  aer_event_t ev;
  logic [15:0] drop_count;

  aer_interface #(.DEPTH(D), .EAR(1'b1)) dut (.*);

  int checks = 0, failures = 0, dropped = 0, popped = 0, occupancy = 0;
  aer_event_t q [$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      bit do_push, do_pop;
      @(negedge clk);
      spk_valid = ($urandom % 3) != 0;
      spk_ch = 8'($urandom);
      spk_vec = ($urandom % 4 == 0) ? '0 : NLIF'($urandom);
      ts = 23'(i);
      // phases: slow reader (overflow), then fast reader (drain)
      ev_ready = (i % 1000 < 500) ? ($urandom % 8 == 0) : ($urandom % 4 != 0);
      #1;
      do_pop = ev_valid && ev_ready;
      if (do_pop) begin
        checks++;
        if (q.size() == 0 || ev != q[0]) begin
          failures++;
          $display("FAIL word %0d", popped);
        end
        if (q.size() > 0) void'(q.pop_front());
        popped++;
      end
      do_push = spk_valid && spk_vec != '0;
      if (do_push) begin
        if (q.size() < D || do_pop) q.push_back('{ear: 1'b1, ts: ts, ch: spk_ch, spikes: spk_vec});
        else dropped++;
      end
    end
    @(negedge clk);
    spk_valid = 0;
    checks++;
    if (drop_count != 16'(dropped)) begin
      failures++;
      $display("FAIL drop_count %0d expected %0d", drop_count, dropped);
    end
    checks++;
    if (dropped == 0) begin failures++; $display("FAIL overflow never happened"); end
    $display("events read %0d dropped %0d", popped, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
