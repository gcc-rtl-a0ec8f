// tb_projection_unit: checks Stage II end to end (MVM, PPU, RU, SCU).
// Random Gaussians in front of random cameras are streamed back to back. A real-
// valued model here moves each mean to camera space, projects it, builds and
// projects its covariance and derives conic, radius and visibility. The unit must
// return, exactly LAT = 22 cycles after each input and with its tag, the centre
// (within 0.05 px), depth, ln w, radius (within one pixel), conic (within 0.5 %) and
// visibility (cases within rounding of the sub-view edge are not judged); the
// camera-space mean must appear on cam_out one cycle after the input. The camera
// changes only between batches, with the pipeline drained.
module tb_projection_unit;
  import gcc_pkg::*;
  localparam int LAT = 22;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, out_valid, cam_valid;
  gauss3d_t    g;
  cam_t        cam;
  logic [31:0] tag_in, tag_out;
  proj_t       p;
  fx_t [2:0]   cam_out;
  int checks = 0, failures = 0, cyc = 0, n_vis = 0, n_cull = 0;
  real q_u [$], q_v [$], q_z [$], q_r [$], q_c0 [$], q_c1 [$], q_c2 [$];
  int  q_vis [$], q_cyc [$];
  logic [31:0] q_tag [$];
  fx_t q_lw [$];
  real q_cx [$], q_cy [$], q_cz [$];

  projection_unit dut (.clk, .rst_n, .in_valid, .g, .cam, .tag_in, .out_valid, .p, .tag_out,
    .cam_valid, .cam_out);

  function automatic real fr(input fx_t v); return real'(v) / (2.0 ** FX_F); endfunction
  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1.0e6;
  endfunction
  function automatic real fabs(input real v); return (v < 0) ? -v : v; endfunction
  function automatic bit off(input real got, input real want, input real tol);
    return fabs(got - want) > tol;
  endfunction

  task automatic qrot(input real q [4], output real r [3][3]);
    real w, x, y, z;
    w = q[0]; x = q[1]; y = q[2]; z = q[3];
    r[0][0] = 1 - 2*(y*y + z*z); r[0][1] = 2*(x*y - w*z);     r[0][2] = 2*(x*z + w*y);
    r[1][0] = 2*(x*y + w*z);     r[1][1] = 1 - 2*(x*x + z*z); r[1][2] = 2*(y*z - w*x);
    r[2][0] = 2*(x*z - w*y);     r[2][1] = 2*(y*z + w*x);     r[2][2] = 1 - 2*(x*x + y*y);
  endtask
  task automatic rand_quat(output real q [4]);
    real n;
    for (int k = 0; k < 4; k++) q[k] = urand(-1.0, 1.0);
    n = $sqrt(q[0]*q[0] + q[1]*q[1] + q[2]*q[2] + q[3]*q[3]) + 1e-9;
    for (int k = 0; k < 4; k++) q[k] = q[k] / n;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && cam_valid) begin
    real x, y, z;
    checks++;
    x = q_cx.pop_front(); y = q_cy.pop_front(); z = q_cz.pop_front();
    if (off(fr(cam_out[0]), x, 1e-3) || off(fr(cam_out[1]), y, 1e-3) || off(fr(cam_out[2]), z, 1e-3)) begin
      failures++;
      $display("cam_out wrong");
    end
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    real u, v, z, r, c0, c1, c2, tol;
    int vis;
    checks++;
    if (q_u.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      u = q_u.pop_front(); v = q_v.pop_front(); z = q_z.pop_front(); r = q_r.pop_front();
      c0 = q_c0.pop_front(); c1 = q_c1.pop_front(); c2 = q_c2.pop_front(); vis = q_vis.pop_front();
      if (cyc - q_cyc.pop_front() != LAT || tag_out != q_tag.pop_front()) begin
        failures++;
        $display("latency or tag wrong");
      end
      if (p.ln_w != q_lw.pop_front() || off(fr(p.depth), z, 1e-3) || off(fr(p.mu2d[0]), u, 0.05) ||
          off(fr(p.mu2d[1]), v, 0.05)) begin
        failures++;
        if (failures < 10) $display("centre (%f %f %f) want (%f %f %f)", fr(p.mu2d[0]), fr(p.mu2d[1]),
          fr(p.depth), u, v, z);
      end
      if (vis >= 0 && int'(p.visible) != vis) begin
        failures++;
        if (failures < 10) $display("visible %0d want %0d (u %f v %f r %f)", p.visible, vis, u, v, r);
      end
      if (vis == 1) begin
        tol = 5e-3 * (fabs(c0) + fabs(c2)) + 2e-5;
        if (off(fr(p.radius), r, 1.0) || off(fr(p.conic[0]), c0, tol) || off(fr(p.conic[1]), c1, tol) ||
            off(fr(p.conic[2]), c2, tol)) begin
          failures++;
          if (failures < 10) $display("radius %f conic (%f %f %f) want %f (%f %f %f)", fr(p.radius),
            fr(p.conic[0]), fr(p.conic[1]), fr(p.conic[2]), r, c0, c1, c2);
        end
      end
    end
  end

  initial begin
    real wr [3][3];
    real wq [4];
    in_valid = 0; g = '0; cam = '0; tag_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      real q [4];
      real r [3][3];
      real m [3][3];
      real sg [3][3];
      real t [2][3];
      real ts [2][3];
      real jm [2][3];
      real pc [3], mu [3], s [3];
      if (n % 100 == 0) begin
        @(negedge clk) in_valid = 0;
        repeat (LAT + 1) @(negedge clk);
        rand_quat(wq);
        qrot(wq, wr);
        for (int i = 0; i < 3; i++) begin
          for (int j = 0; j < 3; j++) cam.view_rot[i][j] = tf(wr[i][j]);
          cam.view_t[i] = tf(urand(-2.0, 2.0));
          cam.cam_pos[i] = '0;
        end
        cam.focal[0] = tf(urand(80.0, 200.0));
        cam.focal[1] = tf(urand(80.0, 200.0));
        cam.center[0] = tf(urand(40.0, 90.0));
        cam.center[1] = tf(urand(40.0, 90.0));
      end
      @(negedge clk);
      in_valid = ($urandom_range(0, 5) != 0);
      // choose the camera-space position, then map it back to world space
      pc[2] = urand(1.0, 30.0);
      pc[0] = urand(-1.2, 1.2) * pc[2];
      pc[1] = urand(-1.2, 1.2) * pc[2];
      for (int i = 0; i < 3; i++) begin
        mu[i] = 0;
        for (int k = 0; k < 3; k++) mu[i] += fr(cam.view_rot[k][i]) * (pc[k] - fr(cam.view_t[k]));
        g.mu[i] = tf(mu[i]);
        g.scale[i] = tf(urand(0.01, 0.6));
      end
      rand_quat(q);
      for (int k = 0; k < 4; k++) g.quat[k] = tf(q[k]);
      g.ln_w = tf(urand(-6.5, 0.0));
      tag_in = $urandom;
      if (in_valid) begin
        real x, y, z, iz, u, v, a, b, c, det, mid, lam, lw, rr, rad;
        int vis;
        for (int i = 0; i < 3; i++) begin
          pc[i] = fr(cam.view_t[i]);
          for (int k = 0; k < 3; k++) pc[i] += fr(cam.view_rot[i][k]) * fr(g.mu[k]);
        end
        x = pc[0]; y = pc[1]; z = pc[2]; iz = 1.0 / z;
        q_cx.push_back(x); q_cy.push_back(y); q_cz.push_back(z);
        u = fr(cam.focal[0]) * x * iz + fr(cam.center[0]);
        v = fr(cam.focal[1]) * y * iz + fr(cam.center[1]);
        for (int k = 0; k < 4; k++) q[k] = fr(g.quat[k]);
        qrot(q, r);
        for (int k = 0; k < 3; k++) s[k] = fr(g.scale[k]);
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) m[i][j] = r[i][j] * s[j];
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
          sg[i][j] = 0;
          for (int k = 0; k < 3; k++) sg[i][j] += m[i][k] * m[j][k];
        end
        jm[0][0] = fr(cam.focal[0]) * iz; jm[0][1] = 0; jm[0][2] = -fr(cam.focal[0]) * x * iz * iz;
        jm[1][0] = 0; jm[1][1] = fr(cam.focal[1]) * iz; jm[1][2] = -fr(cam.focal[1]) * y * iz * iz;
        for (int i = 0; i < 2; i++) for (int j = 0; j < 3; j++) begin
          t[i][j] = 0;
          for (int k = 0; k < 3; k++) t[i][j] += jm[i][k] * fr(cam.view_rot[k][j]);
        end
        for (int i = 0; i < 2; i++) for (int j = 0; j < 3; j++) begin
          ts[i][j] = 0;
          for (int k = 0; k < 3; k++) ts[i][j] += t[i][k] * sg[k][j];
        end
        a = 0; b = 0; c = 0;
        for (int k = 0; k < 3; k++) begin
          a += ts[0][k] * t[0][k]; b += ts[0][k] * t[1][k]; c += ts[1][k] * t[1][k];
        end
        det = a * c - b * b;
        mid = (a + c) / 2.0;
        lam = mid + $sqrt((mid * mid - det > 0) ? mid * mid - det : 0.0);
        lw = fr(g.ln_w) + 5.541263545158426;
        rr = (lw > 0) ? $sqrt(2.0 * lw * lam) : 0.0;
        rad = $ceil(rr);
        if (fabs(lw) < 1e-3 || det < 1e-2 * a * c || fabs(rr - $floor(rr + 0.5)) < 2e-2) vis = -1;
        else if (lw <= 0) vis = 0;
        else begin
          real e [4], mn;
          e[0] = u + rad; e[1] = 128.0 - (u - rad); e[2] = v + rad; e[3] = 128.0 - (v - rad);
          mn = e[0];
          for (int k = 1; k < 4; k++) if (e[k] < mn) mn = e[k];
          if (fabs(mn) < 1.2) vis = -1; else vis = (mn > 0);
        end
        if (vis == 1) n_vis++;
        if (vis == 0) n_cull++;
        q_u.push_back(u); q_v.push_back(v); q_z.push_back(z); q_r.push_back(rad);
        q_c0.push_back(c / det); q_c1.push_back(-b / det); q_c2.push_back(a / det);
        q_vis.push_back(vis); q_cyc.push_back(cyc); q_tag.push_back(tag_in); q_lw.push_back(g.ln_w);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (q_u.size() != 0 || n_vis == 0 || n_cull == 0) begin
      failures++;
      $display("missing %0d, visible %0d, culled %0d", q_u.size(), n_vis, n_cull);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
