// tb_alpha_array: checks the 8 x 8 alpha PE array.
// Random Gaussians (centre, conic, opacity) are paired with random blocks near
// their centre and offered with random gaps, while the consumer applies random
// back-pressure. For each accepted block every pixel's alpha is worked out here as
// min(0.99, exp(ln w - d^T Sigma'^-1 d / 2)) in real arithmetic, 0 below exp(-5.54),
// and must match within 1 % (plus a few LSB); pass must equal alpha >= 1/255 except
// within rounding of that threshold. Blocks must come out in order, with their
// colour, one cycle after acceptance when the consumer is ready; nothing may be
// lost or duplicated under back-pressure.
module tb_alpha_array;
  import gcc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            in_valid, in_ready, out_valid, out_ready, any_pass;
  logic [BLKW-1:0] in_blk, out_blk;
  proj_t           gp;
  u16_t [2:0]      in_rgb, out_rgb;
  u16_t [NPIX-1:0] alpha;
  logic [NPIX-1:0] pass;
  int checks = 0, failures = 0, n_stall = 0, n_any = 0, n_none = 0;
  proj_t           q_gp [$];
  logic [BLKW-1:0] q_blk [$];
  u16_t [2:0]      q_rgb [$];
  logic            acc_d;
  bit              took = 0;

  alpha_array dut (.clk, .rst_n, .in_valid, .in_ready, .in_blk, .gp, .in_rgb, .out_valid,
    .out_ready, .out_blk, .alpha, .pass, .any_pass, .out_rgb);

  function automatic real fr(input fx_t v); return real'(v) / (2.0 ** FX_F); endfunction
  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1.0e6;
  endfunction
  function automatic real fabs(input real v); return (v < 0) ? -v : v; endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record what the array accepts at each clock edge
  always @(posedge clk) begin
    took = rst_n && in_valid && in_ready;
    if (took) begin
      q_gp.push_back(gp); q_blk.push_back(in_blk); q_rgb.push_back(in_rgb);
    end
  end

  // an accepted block must be presented in the next cycle
  always @(posedge clk) begin
    if (!rst_n) acc_d <= 0;
    else begin
      if (acc_d) begin
        checks++;
        if (!out_valid) begin
          failures++;
          $display("accepted block not presented after one cycle");
        end
      end
      acc_d <= in_valid && in_ready;
      if (out_valid && !out_ready) n_stall++;
    end
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    proj_t g;
    logic [BLKW-1:0] b;
    u16_t [2:0] c;
    bit amb, anyw;
    checks++;
    if (q_gp.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      g = q_gp.pop_front(); b = q_blk.pop_front(); c = q_rgb.pop_front();
      if (out_blk != b || out_rgb != c) begin
        failures++;
        $display("block or colour out of order");
      end
      amb = 0; anyw = 0;
      for (int e = 0; e < NPIX; e++) begin
        real dx, dy, pw, ex, want;
        dx = real'(int'(b[3:0]) * 8 + e % 8) - fr(g.mu2d[0]);
        dy = real'(int'(b[7:4]) * 8 + e / 8) - fr(g.mu2d[1]);
        pw = fr(g.ln_w) - 0.5 * (fr(g.conic[0]) * dx * dx + fr(g.conic[2]) * dy * dy)
             - fr(g.conic[1]) * dx * dy;
        ex = $exp(pw) * 65536.0;
        want = (pw < -5.54) ? 0.0 : (ex > real'(ALPHA_CAP)) ? real'(ALPHA_CAP) : ex;
        if (fabs(pw + 5.54) < 0.02) begin                 // at the table's lower edge
          amb = 1;
          continue;
        end
        checks++;
        if (fabs(real'(alpha[e]) - want) > 0.01 * want + 4.0) begin
          failures++;
          if (failures < 10) $display("pixel %0d: alpha %0d want %f", e, alpha[e], want);
        end
        if (fabs(want - real'(ALPHA_MIN)) < 0.012 * want + 4.0) amb = 1;
        else begin
          checks++;
          if (pass[e] != (want >= real'(ALPHA_MIN))) begin
            failures++;
            if (failures < 10) $display("pixel %0d: pass %0d for alpha %f", e, pass[e], want);
          end
          if (want >= real'(ALPHA_MIN)) anyw = 1;
        end
      end
      if (!amb) begin
        checks++;
        if (any_pass != anyw) begin
          failures++;
          $display("any_pass %0d want %0d", any_pass, anyw);
        end
        if (anyw) n_any++; else n_none++;
      end
    end
  end

  initial begin
    in_valid = 0; in_blk = '0; gp = '0; in_rgb = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      real cx, cy, sa, sc, rho, det;
      int bx, by;
      @(negedge clk);
      out_ready = (n < 300) ? 1'b1 : ($urandom_range(0, 3) != 0);
      if (!in_valid || took) begin
        in_valid = ($urandom_range(0, 4) != 0);
        cx = urand(0.0, 128.0); cy = urand(0.0, 128.0);
        sa = urand(1.0, 12.0); sc = urand(1.0, 12.0); rho = urand(-0.8, 0.8);
        det = sa * sa * sc * sc * (1.0 - rho * rho);
        gp.mu2d[0] = tf(cx); gp.mu2d[1] = tf(cy);
        gp.conic[0] = tf(sc * sc / det);
        gp.conic[1] = tf(-rho * sa * sc / det);
        gp.conic[2] = tf(sa * sa / det);
        gp.ln_w = tf(urand(-4.0, 0.2));
        gp.visible = 1;
        bx = int'(cx / 8.0) + $urandom_range(0, 4) - 2;
        by = int'(cy / 8.0) + $urandom_range(0, 4) - 2;
        bx = (bx < 0) ? 0 : (bx > 15) ? 15 : bx;
        by = (by < 0) ? 0 : (by > 15) ? 15 : by;
        in_blk = BLKW'(by * 16 + bx);
        in_rgb = {u16_t'($urandom), u16_t'($urandom), u16_t'($urandom)};
      end
    end
    @(negedge clk);
    while (in_valid && !took) @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (4) @(posedge clk);
    checks++;
    if (q_gp.size() != 0 || n_stall == 0 || n_any == 0 || n_none == 0) begin
      failures++;
      $display("missing %0d, stalls %0d, blocks with/without pass %0d/%0d", q_gp.size(), n_stall,
        n_any, n_none);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
