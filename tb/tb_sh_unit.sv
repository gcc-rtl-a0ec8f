// tb_sh_unit: checks the Spherical Harmonics Unit.
// Random view directions (Gaussian means around a random camera centre) and random
// degree-3 coefficient sets are streamed back to back. The colour of each channel
// is worked out here with the real SH basis of the 3DGS formulation (16 functions),
// plus 0.5, clamped to [0, 1] and scaled to Q0.16; the unit must agree within
// 0.2 % of full scale and deliver each colour exactly LAT = 14 cycles after its input.
module tb_sh_unit;
  import gcc_pkg::*;
  localparam int LAT = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid, out_valid;
  fx_t [2:0]  mu, cam_pos;
  sh_t        sh;
  u16_t [2:0] rgb;
  int checks = 0, failures = 0, cyc = 0, n_clamp = 0;
  real q_r [$], q_g [$], q_b [$];
  int  q_cyc [$];

  sh_unit dut (.clk, .rst_n, .in_valid, .mu, .cam_pos, .sh, .out_valid, .rgb);

  function automatic real fr(input fx_t v); return real'(v) / (2.0 ** FX_F); endfunction
  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1.0e6;
  endfunction
  function automatic real fabs(input real v); return (v < 0) ? -v : v; endfunction

  task automatic basis(input real x, input real y, input real z, output real b [16]);
    real xx, yy, zz;
    xx = x * x; yy = y * y; zz = z * z;
    b[0]  = 0.28209479177387814;
    b[1]  = -0.4886025119029199 * y;
    b[2]  = 0.4886025119029199 * z;
    b[3]  = -0.4886025119029199 * x;
    b[4]  = 1.0925484305920792 * x * y;
    b[5]  = -1.0925484305920792 * y * z;
    b[6]  = 0.31539156525252005 * (2.0 * zz - xx - yy);
    b[7]  = -1.0925484305920792 * x * z;
    b[8]  = 0.5462742152960396 * (xx - yy);
    b[9]  = -0.5900435899266435 * y * (3.0 * xx - yy);
    b[10] = 2.890611442640554 * x * y * z;
    b[11] = -0.4570457994644658 * y * (4.0 * zz - xx - yy);
    b[12] = 0.3731763325901154 * z * (2.0 * zz - 3.0 * xx - 3.0 * yy);
    b[13] = -0.4570457994644658 * x * (4.0 * zz - xx - yy);
    b[14] = 1.445305721320277 * z * (xx - yy);
    b[15] = -0.5900435899266435 * x * (xx - 3.0 * yy);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real w [3];
    checks++;
    if (q_r.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      w[0] = q_r.pop_front(); w[1] = q_g.pop_front(); w[2] = q_b.pop_front();
      if (cyc - q_cyc.pop_front() != LAT) begin
        failures++;
        $display("latency wrong");
      end
      for (int ch = 0; ch < 3; ch++) begin
        checks++;
        if (fabs(real'(rgb[ch]) - w[ch]) > 0.002 * 65536.0) begin
          failures++;
          if (failures < 10) $display("channel %0d: got %0d want %f", ch, rgb[ch], w[ch]);
        end
      end
    end
  end

  initial begin
    in_valid = 0; mu = '0; cam_pos = '0; sh = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      real d [3];
      real b [16];
      real len;
      if (n % 100 == 0) begin
        @(negedge clk) in_valid = 0;
        repeat (LAT + 1) @(negedge clk);
        for (int i = 0; i < 3; i++) cam_pos[i] = tf(urand(-5.0, 5.0));
      end
      @(negedge clk);
      in_valid = ($urandom_range(0, 5) != 0);
      for (int i = 0; i < 3; i++) mu[i] = tf(fr(cam_pos[i]) + urand(-40.0, 40.0));
      if (n % 37 == 0) mu[0] = cam_pos[0] + tf(0.05);       // very close to the camera
      for (int k = 0; k < 16; k++)
        for (int ch = 0; ch < 3; ch++) sh[k][ch] = tf((k == 0) ? urand(-2.0, 2.0) : urand(-0.4, 0.4));
      if (in_valid) begin
        for (int i = 0; i < 3; i++) d[i] = fr(mu[i]) - fr(cam_pos[i]);
        len = $sqrt(d[0] * d[0] + d[1] * d[1] + d[2] * d[2]);
        basis(d[0] / len, d[1] / len, d[2] / len, b);
        for (int ch = 0; ch < 3; ch++) begin
          real c;
          c = 0.5;
          for (int k = 0; k < 16; k++) c += b[k] * fr(sh[k][ch]);
          if (c < 0.0 || c > 1.0) n_clamp++;
          c = (c < 0.0) ? 0.0 : (c > 1.0) ? 65535.0 : c * 65536.0;
          if (ch == 0) q_r.push_back(c); else if (ch == 1) q_g.push_back(c); else q_b.push_back(c);
        end
        q_cyc.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (q_r.size() != 0 || n_clamp == 0) begin
      failures++;
      $display("missing %0d, clamped %0d", q_r.size(), n_clamp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
