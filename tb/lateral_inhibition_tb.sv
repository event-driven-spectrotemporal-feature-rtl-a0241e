// lateral_inhibition_tb: checks max(x_c - k*(x_l+x_r)/2, 0) in floating
// point over random inputs, including cases clipped to zero.
module lateral_inhibition_tb;
  import cochlea_pkg::*;
  import tb_fx_pkg::*;

  fx_t x_c, x_l, x_r, li_k, out;
  int checks = 0, failures = 0, clipped = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  lateral_inhibition dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      real e;
      x_c = to_fx(rnd(0.0, 1.0)); x_l = to_fx(rnd(0.0, 1.0)); x_r = to_fx(rnd(0.0, 1.0));
      li_k = to_fx(rnd(0.0, 1.0));
      #1;
      e = to_r(x_c) - to_r(li_k) * (to_r(x_l) + to_r(x_r)) / 2.0;
      if (e < 0.0) begin e = 0.0; clipped++; end
      checks++;
      if (!near(to_r(out), e, 1e-6) || out < 0) begin
        failures++;
        $display("FAIL out %f exp %f", to_r(out), e);
      end
      @(posedge clk);
    end
    checks++;
    if (clipped == 0) begin failures++; $display("FAIL clipping never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
