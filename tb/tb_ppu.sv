// tb_ppu: checks the Position Projection Unit.
// Random camera-space means (depth 0.5 to 60, inside and outside the view cone) are
// streamed, mostly back to back; focal lengths and principal point change between
// batches, with the pipeline drained, as they are constant during a frame. Each result
// must match the pinhole projection u = fx*x/z + cx, v = fy*y/z + cy and 1/z worked
// out in real arithmetic, and must appear exactly LAT = 6 cycles after its input,
// which also shows the four interleaved dividers keep up with one Gaussian per cycle.
module tb_ppu;
  import gcc_pkg::*;
  localparam int LAT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      in_valid, out_valid;
  fx_t [2:0] cam;
  fx_t [1:0] focal, center, mu2d;
  fx_t       inv_z;
  int checks = 0, failures = 0, cyc = 0;
  real q_u [$], q_v [$], q_iz [$];
  int  q_cyc [$];

  ppu dut (.clk, .rst_n, .in_valid, .cam, .focal, .center, .out_valid, .mu2d, .inv_z);

  function automatic real fr(input fx_t v); return real'(v) / (2.0 ** FX_F); endfunction
  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1.0e6;
  endfunction
  function automatic bit near(input real got, input real want, input real rel, input real abs_tol);
    real d, tol;
    d = got - want;
    tol = rel * ((want < 0) ? -want : want) + abs_tol;
    return d <= tol && -d <= tol;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real u, v, iz;
    checks++;
    if (q_u.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      u = q_u.pop_front(); v = q_v.pop_front(); iz = q_iz.pop_front();
      if (cyc - q_cyc.pop_front() != LAT) begin
        failures++;
        $display("latency wrong");
      end
      if (!near(fr(mu2d[0]), u, 1e-4, 0.05) || !near(fr(mu2d[1]), v, 1e-4, 0.05) ||
          !near(fr(inv_z), iz, 1e-4, 1e-5)) begin
        failures++;
        if (failures < 10) $display("got (%f, %f, %f) want (%f, %f, %f)", fr(mu2d[0]), fr(mu2d[1]),
          fr(inv_z), u, v, iz);
      end
    end
  end

  initial begin
    in_valid = 0; cam = '0; focal = '0; center = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      real z;
      if (n % 100 == 0) begin
        // the camera is a frame constant: change it only with the pipeline empty
        @(negedge clk) in_valid = 0;
        repeat (LAT + 1) @(negedge clk);
        focal[0] = tf(urand(50.0, 400.0));
        focal[1] = tf(urand(50.0, 400.0));
        center[0] = tf(urand(-200.0, 300.0));
        center[1] = tf(urand(-200.0, 300.0));
      end
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      z = urand(0.5, 60.0);
      cam[2] = tf(z);
      cam[0] = tf(urand(-1.0, 1.0) * z);
      cam[1] = tf(urand(-1.0, 1.0) * z);
      if (in_valid) begin
        q_iz.push_back(1.0 / fr(cam[2]));
        q_u.push_back(fr(focal[0]) * fr(cam[0]) / fr(cam[2]) + fr(center[0]));
        q_v.push_back(fr(focal[1]) * fr(cam[1]) / fr(cam[2]) + fr(center[1]));
        q_cyc.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (q_u.size() != 0) begin
      failures++;
      $display("%0d results missing", q_u.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
