// tb_gcc_top: end-to-end test of the renderer at its default sizes.
// A 256 x 128 image (two 128 x 128 sub-views, so compatibility mode is used) of a
// generated scene is rendered and compared pixel by pixel with a floating-point
// reference written here: project every Gaussian (pinhole, Jacobian covariance),
// cull below depth 0.2, drop what does not fit its depth group of 256 in Stage I
// order, sort by depth, colour it from its SH coefficients and blend front to back
// with alpha = min(0.99, w exp(-d^T Sigma'^-1 d / 2)), alpha >= 1/255, stopping a
// pixel once T < 1e-4.
// The scene: 8 faint wide Gaussians nearest the camera, centred in opposite
// corner blocks so that one Gaussian's walk ends where the next one starts
// (ordering stall); 60 content Gaussians; 135 wide opaque "wall" Gaussians in a
// grid that saturate every block; 300 Gaussians behind the walls, all in the last
// depth group, so that group overflows and is skipped once the wall has saturated
// the view; a few Gaussians behind the camera (Stage I cull) and far off screen
// (Stage II cull).
// The testbench models the off-chip memory: Gaussian records, SH coefficients and
// the group lists, each answering in order after a fixed latency.
// It fails if the image differs (more than 2 % of channel values off by more than
// 0.03, or mean error above 0.01), if the run does not finish, or if any mechanism
// never acted: Stage I cull, group overflow, screen cull, boundary identification
// rejecting blocks, early termination, ordering stall, compatibility mode.
module tb_gcc_top;
  import gcc_pkg::*;
  localparam int NPIV = 15, GROUP_N = 256;
  localparam int IMG_W = 256, IMG_H = 128;
  localparam int N_CONTENT = 60, N_WALL = 135, N_BEHIND = 300, N_CULL1 = 8, N_OFF = 8, N_PAIR = 8;
  localparam int NG = N_CONTENT + N_WALL + N_BEHIND + N_CULL1 + N_OFF + N_PAIR;
  localparam real FOC = 150.0, CX = 128.0, CY = 64.0;
  localparam int LAT_G = 4, LAT_SH = 6, LAT_GL = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  cam_t cam;
  logic [15:0] img_w, img_h;
  logic [31:0] num_gauss;
  fx_t [NPIV-1:0] pivots;
  logic g_req_valid, g_rsp_valid, sh_req_valid, sh_rsp_valid;
  logic [31:0] g_req_id, sh_req_id;
  gauss3d_t g_rsp_data;
  sh_t sh_rsp_data;
  logic gl_wr_valid, gl_rd_valid, gl_rsp_valid;
  logic [31:0] gl_wr_addr, gl_wr_id, gl_rd_addr, gl_rsp_id;
  fx_t gl_wr_depth, gl_rsp_depth;
  logic img_valid;
  logic [15:0] img_x, img_y;
  u16_t [2:0][NPIX-1:0] img_rgb;
  logic [31:0] n_stage1_culled, n_group_dropped, n_screen_culled, n_rendered, n_alpha_blocks,
               n_blend_blocks, n_skipped_gauss, n_skipped_groups, n_order_stalls, n_subviews;
  logic cmode, group_overflow;

  gcc_top dut (.clk, .rst_n, .start, .cam, .img_w, .img_h, .num_gauss, .pivots, .busy, .done,
    .g_req_valid, .g_req_id, .g_rsp_valid, .g_rsp_data, .sh_req_valid, .sh_req_id,
    .sh_rsp_valid, .sh_rsp_data, .gl_wr_valid, .gl_wr_addr, .gl_wr_id, .gl_wr_depth,
    .gl_rd_valid, .gl_rd_addr, .gl_rsp_valid, .gl_rsp_id, .gl_rsp_depth, .img_valid, .img_x,
    .img_y, .img_rgb, .n_stage1_culled, .n_group_dropped, .n_screen_culled, .n_rendered,
    .n_alpha_blocks, .n_blend_blocks, .n_skipped_gauss, .n_skipped_groups, .n_order_stalls,
    .n_subviews, .cmode, .group_overflow);

  int checks = 0, failures = 0, cyc = 0;

  // ---------------- scene ----------------
  gauss3d_t gs [NG];
  sh_t      shs [NG];
  real      img_ref [3][IMG_H][IMG_W];
  int       img_hw [3][IMG_H][IMG_W];
  bit       img_seen [IMG_H / 8][IMG_W / 8];

  function automatic real fr(input fx_t v); return real'(v) / (2.0 ** FX_F); endfunction
  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1.0e6;
  endfunction
  function automatic real fabs(input real v); return (v < 0) ? -v : v; endfunction

  task automatic qrot(input real q [4], output real r [3][3]);
    real w, x, y, z;
    w = q[0]; x = q[1]; y = q[2]; z = q[3];
    r[0][0] = 1 - 2*(y*y + z*z); r[0][1] = 2*(x*y - w*z);     r[0][2] = 2*(x*z + w*y);
    r[1][0] = 2*(x*y + w*z);     r[1][1] = 1 - 2*(x*x + z*z); r[1][2] = 2*(y*z - w*x);
    r[2][0] = 2*(x*z - w*y);     r[2][1] = 2*(y*z + w*x);     r[2][2] = 1 - 2*(x*x + y*y);
  endtask

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

  // one Gaussian at pixel (u, v), depth z, pixel-space sizes (su, sv), in-plane angle
  task automatic make_gauss(input int id, input real u, input real v, input real z,
                            input real su, input real sv, input real ang, input real lnw,
                            input real dc_lo, input real dc_hi, input real ho);
    real s;
    s = z / FOC;
    gs[id].mu[0] = tf((u - CX) * s);
    gs[id].mu[1] = tf((v - CY) * s);
    gs[id].mu[2] = tf(z);
    gs[id].scale[0] = tf(su * s);
    gs[id].scale[1] = tf(sv * s);
    gs[id].scale[2] = tf(0.5 * (su < sv ? su : sv) * s);
    gs[id].quat[0] = tf($cos(ang / 2.0));
    gs[id].quat[1] = '0;
    gs[id].quat[2] = '0;
    gs[id].quat[3] = tf($sin(ang / 2.0));
    gs[id].ln_w = tf(lnw);
    for (int k = 0; k < 16; k++)
      for (int ch = 0; ch < 3; ch++) shs[id][k][ch] = tf((k == 0) ? urand(dc_lo, dc_hi) : urand(-ho, ho));
  endtask

  task automatic build_scene();
    int id;
    id = 0;
    for (int n = 0; n < N_CONTENT; n++) begin
      make_gauss(id, urand(-20.0, 276.0), urand(-20.0, 148.0), urand(1.0, 24.0),
                 urand(1.5, 14.0), urand(1.5, 14.0), urand(0.0, 3.14), urand(-2.5, 0.0),
                 -1.5, 1.5, 0.25);
      id++;
    end
    // faint wide Gaussians, nearest of all, centred in opposite corner blocks of a
    // sub-view: the breadth-first walk of one ends near the corner where the next starts
    for (int n = 0; n < N_PAIR; n++) begin
      real px, py;
      px = (n % 2 == 0) ? 4.0 : 124.0;
      py = (n % 4 < 2) ? 4.0 : 124.0;
      if (n % 2 == 1) py = (n % 4 < 2) ? 124.0 : 4.0;
      make_gauss(id, px + 128.0 * (n / 4), py, 0.5 + 0.05 * n, 70.0, 70.0, 0.0, -2.0, -1.0, 1.0, 0.1);
      id++;
    end
    // wall: three layers of a 9 x 5 grid of wide opaque Gaussians at depth 26 to 29
    for (int layer = 0; layer < 3; layer++)
      for (int j = 0; j < 5; j++)
        for (int i = 0; i < 9; i++) begin
          make_gauss(id, 32.0 * i + layer * 10.0 - 10.0, 32.0 * j + layer * 10.0 - 10.0,
                     26.0 + layer + 0.01 * (j * 9 + i), 44.0, 44.0, 0.0, 0.0, -0.3, 0.3, 0.05);
          id++;
        end
    // behind the wall, all beyond the last pivot
    for (int n = 0; n < N_BEHIND; n++) begin
      make_gauss(id, urand(0.0, 256.0), urand(0.0, 128.0), urand(31.0, 60.0),
                 urand(2.0, 10.0), urand(2.0, 10.0), 0.0, urand(-1.0, 0.0), -1.0, 1.0, 0.1);
      id++;
    end
    // behind the camera or closer than 0.2
    for (int n = 0; n < N_CULL1; n++) begin
      make_gauss(id, urand(0.0, 256.0), urand(0.0, 128.0), 1.0, 5.0, 5.0, 0.0, 0.0, -1.0, 1.0, 0.1);
      gs[id].mu[2] = tf(urand(-5.0, 0.15));
      id++;
    end
    // far outside the image
    for (int n = 0; n < N_OFF; n++) begin
      make_gauss(id, urand(600.0, 900.0), urand(-400.0, -200.0), urand(3.0, 20.0),
                 3.0, 3.0, 0.0, 0.0, -1.0, 1.0, 0.1);
      id++;
    end
  endtask

  // ---------------- floating-point reference ----------------
  task automatic reference();
    int   keep [$];
    real  dep [NG];
    int   cnt [NPIV+1];
    real  tpix [IMG_H][IMG_W];
    for (int g = 0; g <= NPIV; g++) cnt[g] = 0;
    for (int id = 0; id < NG; id++) begin
      int grp;
      dep[id] = fr(gs[id].mu[2]);
      if (dep[id] < 0.2) continue;
      grp = 0;
      for (int k = 0; k < NPIV; k++) if (gs[id].mu[2] >= pivots[k]) grp++;
      if (cnt[grp] >= GROUP_N) continue;                 // dropped by the group limit
      cnt[grp]++;
      keep.push_back(id);
    end
    keep.sort() with (dep[item]);
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        tpix[y][x] = 1.0;
        for (int ch = 0; ch < 3; ch++) img_ref[ch][y][x] = 0.0;
      end
    foreach (keep[n]) begin
      int id;
      real q [4];
      real r [3][3];
      real m [3][3];
      real sg [3][3];
      real jm [2][3];
      real ts [2][3];
      real x, y, z, u, v, a, b, c, det, ca, cb, cc, lw, col [3], bs [16], len, rad;
      id = keep[n];
      x = fr(gs[id].mu[0]); y = fr(gs[id].mu[1]); z = fr(gs[id].mu[2]);
      u = FOC * x / z + CX; v = FOC * y / z + CY;
      for (int k = 0; k < 4; k++) q[k] = fr(gs[id].quat[k]);
      qrot(q, r);
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) m[i][j] = r[i][j] * fr(gs[id].scale[j]);
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        sg[i][j] = 0;
        for (int k = 0; k < 3; k++) sg[i][j] += m[i][k] * m[j][k];
      end
      jm[0][0] = FOC / z; jm[0][1] = 0; jm[0][2] = -FOC * x / (z * z);
      jm[1][0] = 0; jm[1][1] = FOC / z; jm[1][2] = -FOC * y / (z * z);
      for (int i = 0; i < 2; i++) for (int j = 0; j < 3; j++) begin
        ts[i][j] = 0;
        for (int k = 0; k < 3; k++) ts[i][j] += jm[i][k] * sg[k][j];
      end
      a = 0; b = 0; c = 0;
      for (int k = 0; k < 3; k++) begin
        a += ts[0][k] * jm[0][k]; b += ts[0][k] * jm[1][k]; c += ts[1][k] * jm[1][k];
      end
      det = a * c - b * b;
      if (det <= 0) continue;
      ca = c / det; cb = -b / det; cc = a / det;
      lw = fr(gs[id].ln_w);
      len = $sqrt(x * x + y * y + z * z);
      basis(x / len, y / len, z / len, bs);
      for (int ch = 0; ch < 3; ch++) begin
        col[ch] = 0.5;
        for (int k = 0; k < 16; k++) col[ch] += bs[k] * fr(shs[id][k][ch]);
        col[ch] = (col[ch] < 0) ? 0.0 : (col[ch] > 1.0) ? 1.0 : col[ch];
      end
      rad = $sqrt(2.0 * (lw + 5.6) * ((a + c) / 2 + $sqrt((a - c) * (a - c) / 4 + b * b))) + 2;
      for (int py = 0; py < IMG_H; py++) begin
        if (py < v - rad || py > v + rad) continue;
        for (int px = 0; px < IMG_W; px++) begin
          real dx, dy, pw, al, tn;
          if (px < u - rad || px > u + rad) continue;
          if (tpix[py][px] == 0.0) continue;
          dx = px - u; dy = py - v;
          pw = lw - 0.5 * (ca * dx * dx + cc * dy * dy) - cb * dx * dy;
          if (pw < -5.54) continue;
          al = $exp(pw);
          if (al > 0.99) al = 0.99;
          if (al < 1.0 / 255.0) continue;
          tn = tpix[py][px] * (1.0 - al);
          if (tn < 1e-4) begin
            tpix[py][px] = 0.0;
            continue;
          end
          for (int ch = 0; ch < 3; ch++) img_ref[ch][py][px] += col[ch] * al * tpix[py][px];
          tpix[py][px] = tn;
        end
      end
    end
  endtask

  // ---------------- off-chip memory model ----------------
  logic [31:0] gl_mem_id [int];
  int q_g_due [$], q_sh_due [$], q_gl_due [$];
  logic [31:0] q_g_id [$], q_sh_id [$], q_gl_addr [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (gl_wr_valid) gl_mem_id[int'(gl_wr_addr)] = gl_wr_id;
    if (g_req_valid) begin q_g_id.push_back(g_req_id); q_g_due.push_back(cyc + LAT_G); end
    if (sh_req_valid) begin q_sh_id.push_back(sh_req_id); q_sh_due.push_back(cyc + LAT_SH); end
    if (gl_rd_valid) begin q_gl_addr.push_back(gl_rd_addr); q_gl_due.push_back(cyc + LAT_GL); end
  end

  always @(negedge clk) begin
    g_rsp_valid = 0; sh_rsp_valid = 0; gl_rsp_valid = 0;
    if (q_g_due.size() > 0 && q_g_due[0] <= cyc) begin
      void'(q_g_due.pop_front());
      g_rsp_valid = 1;
      g_rsp_data = gs[q_g_id.pop_front()];
    end
    if (q_sh_due.size() > 0 && q_sh_due[0] <= cyc) begin
      void'(q_sh_due.pop_front());
      sh_rsp_valid = 1;
      sh_rsp_data = shs[q_sh_id.pop_front()];
    end
    if (q_gl_due.size() > 0 && q_gl_due[0] <= cyc) begin
      int a;
      void'(q_gl_due.pop_front());
      a = int'(q_gl_addr.pop_front());
      gl_rsp_valid = 1;
      gl_rsp_id = gl_mem_id.exists(a) ? gl_mem_id[a] : 32'hFFFF_FFFF;
      gl_rsp_depth = '0;
    end
  end

  // ---------------- image capture ----------------
  always @(posedge clk) if (rst_n && img_valid) begin
    for (int e = 0; e < NPIX; e++)
      for (int ch = 0; ch < 3; ch++)
        img_hw[ch][int'(img_y) + e / 8][int'(img_x) + e % 8] = int'(img_rgb[ch][e]);
    img_seen[int'(img_y) / 8][int'(img_x) / 8] = 1;
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_event(input string what, input bit happened);
    checks++;
    if (!happened) begin
      failures++;
      $display("mechanism never acted: %s", what);
    end
  endtask

  initial begin
    int  n_bad, t0;
    real sum_err, max_err;
    start = 0; num_gauss = NG; img_w = 16'(IMG_W); img_h = 16'(IMG_H);
    g_rsp_valid = 0; sh_rsp_valid = 0; gl_rsp_valid = 0;
    g_rsp_data = '0; sh_rsp_data = '0; gl_rsp_id = '0; gl_rsp_depth = '0;
    cam = '0;
    for (int i = 0; i < 3; i++) cam.view_rot[i][i] = FX_ONE;
    cam.focal[0] = tf(FOC); cam.focal[1] = tf(FOC);
    cam.center[0] = tf(CX); cam.center[1] = tf(CY);
    for (int k = 0; k < NPIV; k++) pivots[k] = tf(2.0 * (k + 1));   // 2, 4, ... 30
    for (int yb = 0; yb < IMG_H / 8; yb++) for (int xb = 0; xb < IMG_W / 8; xb++) img_seen[yb][xb] = 0;
    build_scene();
    reference();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    $display("frame rendered in %0d cycles", cyc - t0);
    $display("stage1 culled %0d, dropped %0d, screen culled %0d, rendered %0d", n_stage1_culled,
      n_group_dropped, n_screen_culled, n_rendered);
    $display("alpha blocks %0d, blended blocks %0d, skipped Gaussians %0d, skipped groups %0d",
      n_alpha_blocks, n_blend_blocks, n_skipped_gauss, n_skipped_groups);
    $display("ordering stalls %0d, sub-views %0d", n_order_stalls, n_subviews);
    // image
    n_bad = 0; sum_err = 0; max_err = 0;
    for (int yb = 0; yb < IMG_H / 8; yb++)
      for (int xb = 0; xb < IMG_W / 8; xb++) begin
        checks++;
        if (!img_seen[yb][xb]) begin
          failures++;
          $display("block (%0d, %0d) never written out", xb, yb);
        end
      end
    for (int ch = 0; ch < 3; ch++)
      for (int y = 0; y < IMG_H; y++)
        for (int x = 0; x < IMG_W; x++) begin
          real e;
          e = fabs(real'(img_hw[ch][y][x]) / 65536.0 - img_ref[ch][y][x]);
          sum_err += e;
          if (e > max_err) max_err = e;
          if (e > 0.03) n_bad++;
        end
    $display("image: mean error %f, max error %f, %0d of %0d values off by more than 0.03",
      sum_err / (3.0 * IMG_W * IMG_H), max_err, n_bad, 3 * IMG_W * IMG_H);
    checks++;
    if (n_bad > 3 * IMG_W * IMG_H / 50 || sum_err / (3.0 * IMG_W * IMG_H) > 0.01) begin
      failures++;
      $display("rendered image differs from the reference");
    end
    expect_event("Stage I depth cull", n_stage1_culled > 0);
    expect_event("depth group overflow", group_overflow && n_group_dropped > 0);
    expect_event("screen culling", n_screen_culled > 0);
    expect_event("boundary identification rejecting blocks", n_alpha_blocks > n_blend_blocks);
    expect_event("early termination of a Gaussian", n_skipped_gauss > 0);
    expect_event("early termination of a depth group", n_skipped_groups > 0);
    expect_event("blending ordering stall", n_order_stalls > 0);
    expect_event("compatibility mode", cmode && n_subviews == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
