// car_stage_tb: drives the CAR section with random states, coefficients and
// inputs and compares its outputs with the resonator equations evaluated in
// floating point (tolerance 1e-5).
module car_stage_tb;
  import cochlea_pkg::*;
  import tb_fx_pkg::*;

  fx_t x_in, z1, z2, a0, c0, r, h, g, y_old, z1_nx, z2_nx, y, v;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  car_stage dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, fx_t got, real exp);
    checks++;
    if (!near(to_r(got), exp, 1e-5)) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, to_r(got), exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 500; i++) begin
      real rx, rz1, rz2, ra0, rc0, rr, rh, rg, ryo, e1, e2, ey;
      real theta;
      theta = rnd(0.01, 1.5);
      rx = rnd(-1.0, 1.0); rz1 = rnd(-2.0, 2.0); rz2 = rnd(-2.0, 2.0);
      ra0 = $cos(theta); rc0 = $sin(theta); rr = rnd(0.8, 0.999);
      rh = rnd(0.0, 1.0); rg = rnd(0.5, 1.2); ryo = rnd(-2.0, 2.0);
      x_in = to_fx(rx); z1 = to_fx(rz1); z2 = to_fx(rz2); a0 = to_fx(ra0); c0 = to_fx(rc0);
      r = to_fx(rr); h = to_fx(rh); g = to_fx(rg); y_old = to_fx(ryo);
      // recompute from the quantised inputs
      rx = to_r(x_in); rz1 = to_r(z1); rz2 = to_r(z2); ra0 = to_r(a0); rc0 = to_r(c0);
      rr = to_r(r); rh = to_r(h); rg = to_r(g); ryo = to_r(y_old);
      #1;
      e1 = rr * (ra0 * rz1 - rc0 * rz2) + rx;
      e2 = rr * (rc0 * rz1 + ra0 * rz2);
      ey = rg * (rx + rh * e2);
      chk("z1", z1_nx, e1);
      chk("z2", z2_nx, e2);
      chk("y", y, ey);
      chk("v", v, ey - ryo);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
