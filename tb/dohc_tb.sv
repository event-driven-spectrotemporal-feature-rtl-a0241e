// dohc_tb: checks the pole radius produced by the DOHC against
// r = r1 + d_rz*(1-b)/(1+(scale*v+offset)^2) in floating point, and that
// with the FAC switched off r equals r1 exactly.
module dohc_tb;
  import cochlea_pkg::*;
  import tb_fx_pkg::*;

  logic fac_en;
  fx_t v, b, r1, d_rz, scale, offset, r;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  dohc dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 600; i++) begin
      real rv, rb, rr1, rd, rs, ro, u, e;
      fac_en = (i % 4) != 3;
      v = to_fx(rnd(-20.0, 20.0)); b = to_fx(rnd(0.0, 1.0)); r1 = to_fx(rnd(0.8, 0.95));
      d_rz = to_fx(rnd(0.0, 0.1)); scale = to_fx(rnd(0.0, 0.5)); offset = to_fx(rnd(-0.1, 0.1));
      rv = to_r(v); rb = to_r(b); rr1 = to_r(r1); rd = to_r(d_rz); rs = to_r(scale); ro = to_r(offset);
      #1;
      u = rs * rv + ro;
      e = fac_en ? rr1 + rd * (1.0 - rb) / (1.0 + u * u) : rr1;
      checks++;
      if (!near(to_r(r), e, 2e-6) || (!fac_en && r != r1)) begin
        failures++;
        $display("FAIL fac=%0d r=%f exp %f", fac_en, to_r(r), e);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
