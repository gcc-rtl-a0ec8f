// tb_ru: checks the Reconstruction Unit.
// Random Gaussians (scales 0.01 to 1, random unit quaternions) seen by random
// cameras (random rotation W, focal 50 to 400, camera-space depth 1 to 30) are
// streamed back to back. The 2D covariance Sigma' = J W R S S^T R^T W^T J^T is
// worked out here in real arithmetic from the same quantised inputs, and each of
// a, b, c must agree within 0.2 % of the larger diagonal term; results must appear
// exactly LAT = 2 cycles after their inputs. The camera changes only between
// batches, with the pipeline drained.
module tb_ru;
  import gcc_pkg::*;
  localparam int LAT = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           in_valid, out_valid;
  fx_t [2:0]      scale, cam, cov2d;
  fx_t [3:0]      quat;
  fx_t            inv_z;
  fx_t [2:0][2:0] view_rot;
  fx_t [1:0]      focal;
  int checks = 0, failures = 0, cyc = 0;
  real q_a [$], q_b [$], q_c [$];
  int  q_cyc [$];

  ru dut (.clk, .rst_n, .in_valid, .scale, .quat, .cam, .inv_z, .view_rot, .focal, .out_valid, .cov2d);

  function automatic real fr(input fx_t v); return real'(v) / (2.0 ** FX_F); endfunction
  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1.0e6;
  endfunction

  // rotation matrix of a unit quaternion (w, x, y, z)
  task automatic qrot(input real w, input real x, input real y, input real z, output real r [3][3]);
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
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real a, b, c, tol, d0, d1, d2;
    checks++;
    if (q_a.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      a = q_a.pop_front(); b = q_b.pop_front(); c = q_c.pop_front();
      if (cyc - q_cyc.pop_front() != LAT) begin
        failures++;
        $display("latency wrong");
      end
      tol = 2e-3 * ((a > c) ? a : c) + 0.01;
      d0 = fr(cov2d[0]) - a; d1 = fr(cov2d[1]) - b; d2 = fr(cov2d[2]) - c;
      if (d0 > tol || -d0 > tol || d1 > tol || -d1 > tol || d2 > tol || -d2 > tol) begin
        failures++;
        if (failures < 10) $display("got (%f %f %f) want (%f %f %f)", fr(cov2d[0]), fr(cov2d[1]),
          fr(cov2d[2]), a, b, c);
      end
    end
  end

  initial begin
    real wq [4];
    real wr [3][3];
    in_valid = 0; scale = '0; quat = '0; cam = '0; inv_z = '0; view_rot = '0; focal = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      real q [4];
      real r [3][3];
      real m [3][3];
      real sg [3][3];
      real t [2][3];
      real ts [2][3];
      real jm [2][3];
      real z, s [3], ww [3][3];
      if (n % 80 == 0) begin
        @(negedge clk) in_valid = 0;
        repeat (LAT + 1) @(negedge clk);
        rand_quat(wq);
        qrot(wq[0], wq[1], wq[2], wq[3], wr);
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) view_rot[i][j] = tf(wr[i][j]);
        focal[0] = tf(urand(50.0, 400.0));
        focal[1] = tf(urand(50.0, 400.0));
      end
      @(negedge clk);
      in_valid = ($urandom_range(0, 5) != 0);
      rand_quat(q);
      for (int k = 0; k < 4; k++) quat[k] = tf(q[k]);
      for (int k = 0; k < 3; k++) scale[k] = tf(urand(0.01, 1.0));
      z = urand(1.0, 30.0);
      cam[2] = tf(z);
      cam[0] = tf(urand(-0.8, 0.8) * z);
      cam[1] = tf(urand(-0.8, 0.8) * z);
      inv_z = tf(1.0 / fr(cam[2]));
      if (in_valid) begin
        qrot(fr(quat[0]), fr(quat[1]), fr(quat[2]), fr(quat[3]), r);
        for (int k = 0; k < 3; k++) s[k] = fr(scale[k]);
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
          m[i][j] = r[i][j] * s[j];
          ww[i][j] = fr(view_rot[i][j]);
        end
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
          sg[i][j] = 0;
          for (int k = 0; k < 3; k++) sg[i][j] += m[i][k] * m[j][k];
        end
        jm[0][0] = fr(focal[0]) * fr(inv_z); jm[0][1] = 0;
        jm[0][2] = -fr(focal[0]) * fr(cam[0]) * fr(inv_z) * fr(inv_z);
        jm[1][0] = 0; jm[1][1] = fr(focal[1]) * fr(inv_z);
        jm[1][2] = -fr(focal[1]) * fr(cam[1]) * fr(inv_z) * fr(inv_z);
        for (int i = 0; i < 2; i++) for (int j = 0; j < 3; j++) begin
          t[i][j] = 0;
          for (int k = 0; k < 3; k++) t[i][j] += jm[i][k] * ww[k][j];
        end
        for (int i = 0; i < 2; i++) for (int j = 0; j < 3; j++) begin
          ts[i][j] = 0;
          for (int k = 0; k < 3; k++) ts[i][j] += t[i][k] * sg[k][j];
        end
        begin
          real a, b, c;
          a = 0; b = 0; c = 0;
          for (int k = 0; k < 3; k++) begin
            a += ts[0][k] * t[0][k];
            b += ts[0][k] * t[1][k];
            c += ts[1][k] * t[1][k];
          end
          q_a.push_back(a); q_b.push_back(b); q_c.push_back(c);
        end
        q_cyc.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (q_a.size() != 0) begin
      failures++;
      $display("%0d results missing", q_a.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
