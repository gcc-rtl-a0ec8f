// ru: Reconstruction Unit.
//
// Rebuilds the 3D covariance of a Gaussian from its scale s and unit quaternion
// q = (w, x, y, z): R is the rotation matrix of q, M = R * diag(s), Sigma = M * M^T.
// It also forms the Jacobian of the perspective projection at the camera-space mean
// t = (tx, ty, tz):  J = [fx/tz, 0, -fx*tx/tz^2 ; 0, fy/tz, -fy*ty/tz^2],
// and projects Sigma' = (J W) Sigma (J W)^T, with W the world-to-camera rotation
// (Eq. 1 of the paper). Output is the symmetric 2 x 2 Sigma' as (a, b, c).
// Timing: two register stages; out_valid 2 cycles after in_valid, one per cycle.
// The paper fixes what is computed; building it from dedicated multipliers in two
// stages (rather than time-sharing the MVM) and omitting the 0.3-pixel low-pass
// term of the 3DGS reference are this design's choices. 1/tz comes from the PPU.
module ru
  import gcc_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  fx_t [2:0]      scale,
  input  fx_t [3:0]      quat,
  input  fx_t [2:0]      cam,
  input  fx_t            inv_z,
  input  fx_t [2:0][2:0] view_rot,
  input  fx_t [1:0]      focal,
  output logic           out_valid,
  output fx_t [2:0]      cov2d
);
  // ---- stage 1: Sigma and T = J * W ----
  fx_t [2:0][2:0] rot, m;
  fx_t [2:0][2:0] sig;
  fx_t [1:0][2:0] jac, tm;
  always_comb begin
    fx_t w, x, y, z, two;
    two = FX_ONE <<< 1;
    w = quat[0]; x = quat[1]; y = quat[2]; z = quat[3];
    rot[0][0] = FX_ONE - fx_mul(two, fx_mul(y, y) + fx_mul(z, z));
    rot[0][1] = fx_mul(two, fx_mul(x, y) - fx_mul(w, z));
    rot[0][2] = fx_mul(two, fx_mul(x, z) + fx_mul(w, y));
    rot[1][0] = fx_mul(two, fx_mul(x, y) + fx_mul(w, z));
    rot[1][1] = FX_ONE - fx_mul(two, fx_mul(x, x) + fx_mul(z, z));
    rot[1][2] = fx_mul(two, fx_mul(y, z) - fx_mul(w, x));
    rot[2][0] = fx_mul(two, fx_mul(x, z) - fx_mul(w, y));
    rot[2][1] = fx_mul(two, fx_mul(y, z) + fx_mul(w, x));
    rot[2][2] = FX_ONE - fx_mul(two, fx_mul(x, x) + fx_mul(y, y));
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) m[r][c] = fx_mul(rot[r][c], scale[c]);
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        sig[r][c] = '0;
        for (int k = 0; k < 3; k++) sig[r][c] = fx_fma(m[r][k], m[c][k], sig[r][c]);
      end
    jac[0][0] = fx_mul(focal[0], inv_z);
    jac[0][1] = '0;
    jac[0][2] = -fx_mul(fx_mul(focal[0], cam[0]), fx_mul(inv_z, inv_z));
    jac[1][0] = '0;
    jac[1][1] = fx_mul(focal[1], inv_z);
    jac[1][2] = -fx_mul(fx_mul(focal[1], cam[1]), fx_mul(inv_z, inv_z));
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 3; c++) begin
        tm[r][c] = '0;
        for (int k = 0; k < 3; k++) tm[r][c] = fx_fma(jac[r][k], view_rot[k][c], tm[r][c]);
      end
  end

  logic           v1;
  fx_t [2:0][2:0] sig_q;
  fx_t [1:0][2:0] tm_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; sig_q <= '0; tm_q <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        sig_q <= sig;
        tm_q  <= tm;
      end
    end
  end

  // ---- stage 2: Sigma' = T Sigma T^T ----
  fx_t [1:0][2:0] ts;   // T * Sigma
  fx_t [2:0]      c2;
  always_comb begin
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 3; c++) begin
        ts[r][c] = '0;
        for (int k = 0; k < 3; k++) ts[r][c] = fx_fma(tm_q[r][k], sig_q[k][c], ts[r][c]);
      end
    c2 = '0;
    for (int k = 0; k < 3; k++) begin
      c2[0] = fx_fma(ts[0][k], tm_q[0][k], c2[0]);
      c2[1] = fx_fma(ts[0][k], tm_q[1][k], c2[1]);
      c2[2] = fx_fma(ts[1][k], tm_q[1][k], c2[2]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; cov2d <= '0;
    end else begin
      out_valid <= v1;
      if (v1) cov2d <= c2;
    end
  end
endmodule
