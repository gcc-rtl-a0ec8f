// tb_exp_lut: checks the piecewise-linear EXP table against exp() over its range.
// Random and edge inputs are driven; the expected value is the real exponential in
// Q0.16, which the 16-chord table must match within 1 % (plus a few LSB); inputs
// below -5.54 must give 0, and inputs at or above 0, or an exponential above 0.99,
// the 0.99 cap. The table is combinational, so each check samples after 1 ns.
module tb_exp_lut;
  import gcc_pkg::*;
  fx_t  x;
  u16_t alpha;
  int   checks = 0, failures = 0;

  exp_lut dut (.x, .alpha);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_at(input real xr);
    real e, tol, d;
    int  want;
    x = fx_t'(longint'(xr * (2.0 ** FX_F)));
    #1;
    e = $exp(real'(x) / (2.0 ** FX_F)) * 65536.0;
    if (xr < -5.54) want = 0;
    else if (xr >= 0.0 || e > real'(ALPHA_CAP)) want = int'(ALPHA_CAP);
    else want = int'(e);
    tol = (xr < -5.54 || xr >= 0.0) ? 0.0 : 0.01 * e + 4.0;
    checks++;
    d = real'(alpha) - real'(want);
    if (d > tol || -d > tol) begin
      failures++;
      if (failures < 10) $display("exp(%f): got %0d want %0d", xr, alpha, want);
    end
  endtask

  initial begin
    x = '0;
    check_at(-6.0);
    check_at(-5.6);
    check_at(-5.5);
    check_at(-0.001);
    check_at(0.0);
    check_at(0.7);
    for (int s = 0; s < 16; s++) check_at(-5.54 + s * (5.54 / 16) + 0.001);
    for (int i = 0; i < 2000; i++)
      check_at(-6.5 + 7.0 * real'($urandom_range(0, 1000000)) / 1.0e6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
