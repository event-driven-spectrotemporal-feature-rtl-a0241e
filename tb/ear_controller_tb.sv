// ear_controller_tb: checks the channel slot schedule of the ear controller
// with N_CH = 10: after an accepted sample, slots 0..N_CH-1 on consecutive
// cycles, then DRAIN cycles, one agc_start pulse, a wait while the AGC
// reports busy, and only then a new sample. Also checks that samples
// arriving while busy set overrun, that a switched-off ear ignores samples,
// that lowering last_ch shortens the channel pass, and the sample index.
module ear_controller_tb;
  localparam int N = 10;
  localparam int DR = 5;
  localparam int CHW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable = 1, sample_valid = 0, sample_accept, slot_valid, agc_start, agc_busy = 0;
  logic busy, overrun;
  logic [CHW-1:0] slot_ch, last_ch = CHW'(N - 1);
  logic [22:0] ts;

  ear_controller #(.N_CH(N), .DRAIN(DR)) dut (.*);

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

  // run one sample; agc_hold = cycles the AGC stays busy after start
  task automatic one_sample(int agc_hold, int s, int nact = N);
    int cyc;
    @(negedge clk);
    sample_valid = 1;
    #1 check(sample_accept, "sample not accepted");
    @(negedge clk);
    sample_valid = 0;
    for (int c = 0; c < nact; c++) begin
      check(slot_valid && slot_ch == CHW'(c), $sformatf("slot %0d", c));
      check(ts == 23'(s), "ts during sample");
      @(negedge clk);
    end
    for (int d = 0; d < DR; d++) begin
      check(!slot_valid && !agc_start && busy, "drain");
      @(negedge clk);
    end
    check(agc_start, "agc_start");
    @(negedge clk);
    check(!agc_start, "agc_start one cycle");
    agc_busy = (agc_hold > 0);
    cyc = 0;
    while (cyc < agc_hold) begin
      check(busy, "busy while agc busy");
      // a sample arriving now must be refused
      if (cyc == 0) begin sample_valid = 1; #1 check(!sample_accept, "accepted while busy"); end
      @(negedge clk);
      sample_valid = 0;
      cyc++;
    end
    agc_busy = 0;
    @(negedge clk);
    check(!busy, "idle after agc");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    one_sample(0, 0);
    check(!overrun, "no overrun yet");
    one_sample(7, 1);
    check(overrun, "overrun flagged");
    one_sample(0, 2);
    // fewer active channels
    last_ch = CHW'(3);
    one_sample(0, 3, 4);
    last_ch = CHW'(N - 1);
    // ear switched off
    enable = 0;
    @(negedge clk);
    sample_valid = 1;
    #1 check(!sample_accept, "accepted while disabled");
    @(negedge clk);
    sample_valid = 0;
    check(!busy && !slot_valid, "idle while disabled");
    check(ts == 23'd4, "ts count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
