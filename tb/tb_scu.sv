// tb_scu: checks the Screen Culling Unit.
// Random 2D covariances (mostly positive definite, some singular or indefinite),
// opacities (ln w from -7 to 0) and centres inside, near and far outside the
// 128 x 128 sub-view are streamed back to back. Expected values are worked out
// here in real arithmetic: the conic (inverse covariance), the opacity-aware radius
// r = ceil(sqrt(2 ln(255 w) lambda_max)) and the visibility decision (det > 0,
// 255 w > 1, square of half-size r touching the sub-view). Cases within rounding
// distance of a decision boundary are not judged. Results must come exactly LAT =
// 13 cycles after their inputs. All three culling reasons must occur.
module tb_scu;
  import gcc_pkg::*;
  localparam int LAT = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      in_valid, out_valid, visible;
  fx_t [1:0] mu2d;
  fx_t [2:0] cov2d, conic;
  fx_t       ln_w, radius;
  int checks = 0, failures = 0, cyc = 0;
  int n_vis = 0, n_det = 0, n_opa = 0, n_off = 0;
  real q_c0 [$], q_c1 [$], q_c2 [$], q_r [$];
  int  q_vis [$], q_cyc [$], q_rsure [$];

  scu dut (.clk, .rst_n, .in_valid, .mu2d, .cov2d, .ln_w, .out_valid, .visible, .conic, .radius);

  function automatic real fr(input fx_t v); return real'(v) / (2.0 ** FX_F); endfunction
  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1.0e6;
  endfunction
  function automatic real fabs(input real v); return (v < 0) ? -v : v; endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real c0, c1, c2, r;
    int  vis, rsure;
    checks++;
    if (q_r.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      c0 = q_c0.pop_front(); c1 = q_c1.pop_front(); c2 = q_c2.pop_front(); r = q_r.pop_front();
      vis = q_vis.pop_front(); rsure = q_rsure.pop_front();
      if (cyc - q_cyc.pop_front() != LAT) begin
        failures++;
        $display("latency wrong");
      end
      // vis: 1 visible, 0 culled, -1 too close to a boundary to judge
      if (vis >= 0 && int'(visible) != vis) begin
        failures++;
        if (failures < 10) $display("visible %0d, want %0d (r want %f got %f)", visible, vis, r, fr(radius));
      end
      if (vis == 1) begin
        real tol;
        tol = 1e-3 * (fabs(c0) + fabs(c2)) + 1e-4;
        if (fabs(fr(conic[0]) - c0) > tol || fabs(fr(conic[1]) - c1) > tol ||
            fabs(fr(conic[2]) - c2) > tol) begin
          failures++;
          if (failures < 10) $display("conic (%f %f %f) want (%f %f %f)", fr(conic[0]), fr(conic[1]),
            fr(conic[2]), c0, c1, c2);
        end
        if (rsure ? (fr(radius) != r) : (fabs(fr(radius) - r) > 1.0)) begin
          failures++;
          if (failures < 10) $display("radius %f want %f", fr(radius), r);
        end
      end
    end
  end

  initial begin
    in_valid = 0; mu2d = '0; cov2d = '0; ln_w = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 800; n++) begin
      real a, b, c, det, mid, lam, lw, rr, r, u, v, rho;
      int vis, kind;
      @(negedge clk);
      in_valid = ($urandom_range(0, 5) != 0);
      a = urand(0.3, 300.0); c = urand(0.3, 300.0);
      kind = $urandom_range(0, 19);
      rho = (kind == 0) ? 1.0 : (kind == 1) ? urand(1.05, 2.0) : urand(-0.95, 0.95);
      b = rho * $sqrt(a * c) * (($urandom_range(0, 1) == 1) ? 1.0 : -1.0);
      cov2d[0] = tf(a); cov2d[1] = tf(b); cov2d[2] = tf(c);
      ln_w = tf(urand(-7.0, 0.0));
      u = urand(-150.0, 280.0); v = urand(-150.0, 280.0);
      mu2d[0] = tf(u); mu2d[1] = tf(v);
      if (in_valid) begin
        a = fr(cov2d[0]); b = fr(cov2d[1]); c = fr(cov2d[2]);
        u = fr(mu2d[0]); v = fr(mu2d[1]);
        det = a * c - b * b;
        mid = (a + c) / 2.0;
        lam = mid + $sqrt((mid * mid - det > 0) ? mid * mid - det : 0.0);
        lw = fr(ln_w) + 5.541263545158426;
        rr = (lw > 0) ? $sqrt(2.0 * lw * lam) : 0.0;
        r = $ceil(rr);
        q_rsure.push_back(fabs(rr - $floor(rr + 0.5)) > 1e-3);
        if (fabs(det) < 1e-2 * a * c + 1e-3 || fabs(lw) < 1e-3) vis = -1;
        else if (det <= 0) begin vis = 0; n_det++; end
        else if (lw <= 0) begin vis = 0; n_opa++; end
        else begin
          real e0, e1, e2, e3, m0, m1;
          e0 = u + r; e1 = 128.0 - (u - r); e2 = v + r; e3 = 128.0 - (v - r);
          m0 = (e0 < e1) ? e0 : e1; m1 = (e2 < e3) ? e2 : e3;
          if (m0 < m1) m1 = m0;
          if (fabs(m1) < 1.1 || fabs(rr - $floor(rr + 0.5)) < 1e-3) vis = -1;
          else begin
            vis = (m1 > 0);
            if (vis == 1) n_vis++; else n_off++;
          end
        end
        q_vis.push_back(vis);
        q_r.push_back(r);
        q_c0.push_back(c / det); q_c1.push_back(-b / det); q_c2.push_back(a / det);
        q_cyc.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (q_r.size() != 0) begin
      failures++;
      $display("%0d results missing", q_r.size());
    end
    checks++;
    if (n_vis == 0 || n_det == 0 || n_opa == 0 || n_off == 0) begin
      failures++;
      $display("cases: visible %0d det %0d opacity %0d off-screen %0d", n_vis, n_det, n_opa, n_off);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
