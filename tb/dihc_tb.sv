// dihc_tb: checks one IHC update (high-pass, offset rectification,
// rational compression z^3/(z^3+z^2+0.1), capacitor and two smoothing
// filters) against the same equations in floating point, over random
// states and BM inputs including strongly negative ones (rectified to 0).
module dihc_tb;
  import cochlea_pkg::*;
  import tb_fx_pkg::*;

  fx_t y, ac, cap, l1, l2, c_ac, c_in, c_out, c_lpf;
  fx_t ac_nx, cap_nx, l1_nx, l2_nx, ihc;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  dihc dut (.*);

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
      real ry, rac, rcap, rl1, rl2, ca, ci, co, cl, hp, z, cond, q, ecap, el1, el2;
      y = to_fx(rnd(-3.0, 3.0)); ac = to_fx(rnd(-0.5, 0.5)); cap = to_fx(rnd(0.0, 1.0));
      l1 = to_fx(rnd(0.0, 0.5)); l2 = to_fx(rnd(0.0, 0.5));
      c_ac = to_fx(rnd(0.0, 0.01)); c_in = to_fx(rnd(0.0, 0.02));
      c_out = to_fx(rnd(0.0, 0.2)); c_lpf = to_fx(rnd(0.1, 0.6));
      ry = to_r(y); rac = to_r(ac); rcap = to_r(cap); rl1 = to_r(l1); rl2 = to_r(l2);
      ca = to_r(c_ac); ci = to_r(c_in); co = to_r(c_out); cl = to_r(c_lpf);
      #1;
      hp = ry - rac;
      z = hp + 0.13;
      if (z < 0.0) z = 0.0;
      cond = z * z * z / (z * z * z + z * z + 0.1);
      q = cond * rcap;
      ecap = rcap + ci * (1.0 - rcap) - co * q;
      el1 = rl1 + cl * (q - rl1);
      el2 = rl2 + cl * (el1 - rl2);
      chk("ac", ac_nx, rac + ca * hp);
      chk("cap", cap_nx, ecap);
      chk("l1", l1_nx, el1);
      chk("l2", l2_nx, el2);
      chk("ihc", ihc, el2);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
