// tb_runtime_identifier: checks the block-level boundary identification.
// For each trial a random elliptical footprint (a set of blocks standing in for the
// blocks with some alpha >= 1/255), a random centre (sometimes off the sub-view)
// and a random transmittance mask are chosen. The testbench plays the alpha array:
// it accepts blocks with random back-pressure and returns pass / fail results after
// random delays, out of order. The expected set of dispatched blocks is worked out
// here as the closure of the breadth-first search: the clamped start block, then
// every unmasked 8-neighbour of a dispatched block that passes. Each trial checks
// that exactly that set is dispatched, each block once, that `done` pulses once and
// `busy` falls, and that a start block already masked ends the Gaussian at once.
module tb_runtime_identifier;
  import gcc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            start, busy, done, blk_valid, blk_ready, res_valid, res_pass;
  fx_t [1:0]       center;
  logic [NBLK-1:0] tmask;
  logic [BLKW-1:0] blk, res_blk;
  int checks = 0, failures = 0;

  bit  foot [NBLK];
  int  seen [NBLK];
  int  n_done;
  logic [BLKW-1:0] pend_blk [$];
  int  pend_due [$];
  int  cyc = 0;

  runtime_identifier dut (.clk, .rst_n, .start, .center, .tmask, .busy, .done, .blk_valid,
    .blk_ready, .blk, .res_valid, .res_blk, .res_pass);

  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1.0e6;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // alpha-array model: take dispatched blocks, answer after 1 to 5 cycles
  always @(posedge clk) if (rst_n) begin
    if (blk_valid && blk_ready) begin
      seen[blk]++;
      pend_blk.push_back(blk);
      pend_due.push_back(cyc + $urandom_range(1, 5));
    end
    if (done) n_done++;
  end

  always @(negedge clk) begin
    blk_ready = ($urandom_range(0, 3) != 0);
    res_valid = 0; res_blk = '0; res_pass = 0;
    for (int k = 0; k < pend_blk.size(); k++)
      if (pend_due[k] <= cyc) begin
        res_valid = 1; res_blk = pend_blk[k]; res_pass = foot[pend_blk[k]];
        pend_blk.delete(k); pend_due.delete(k);
        break;
      end
  end

  initial begin
    int n_masked_start = 0, n_big = 0;
    start = 0; center = '0; tmask = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 120; trial++) begin
      real cx, cy, rx, ry;
      int  sx, sy, sb, cnt;
      bit  want [NBLK];
      bit  grow;
      cx = urand(-30.0, 158.0); cy = urand(-30.0, 158.0);
      rx = urand(0.3, 6.0); ry = urand(0.3, 6.0);
      for (int b = 0; b < NBLK; b++) begin
        real ex, ey;
        ex = (real'(b % 16) * 8.0 + 4.0 - cx) / (8.0 * rx);
        ey = (real'(b / 16) * 8.0 + 4.0 - cy) / (8.0 * ry);
        foot[b] = (ex * ex + ey * ey) <= 1.0;
        tmask[b] = (trial % 3 == 0) ? ($urandom_range(0, 5) == 0) : 1'b0;
        seen[b] = 0;
        want[b] = 0;
      end
      sx = int'($floor(cx / 8.0)); sy = int'($floor(cy / 8.0));
      sx = (sx < 0) ? 0 : (sx > 15) ? 15 : sx;
      sy = (sy < 0) ? 0 : (sy > 15) ? 15 : sy;
      sb = sy * 16 + sx;
      if (trial % 10 == 5) tmask[sb] = 1;
      if (tmask[sb]) n_masked_start++;
      // expected closure
      if (!tmask[sb]) want[sb] = 1;
      grow = 1;
      while (grow) begin
        grow = 0;
        for (int b = 0; b < NBLK; b++)
          if (want[b] && foot[b])
            for (int dy = -1; dy <= 1; dy++)
              for (int dx = -1; dx <= 1; dx++) begin
                int nx, ny;
                nx = b % 16 + dx; ny = b / 16 + dy;
                if (nx >= 0 && nx < 16 && ny >= 0 && ny < 16 && !tmask[ny * 16 + nx] &&
                    !want[ny * 16 + nx]) begin
                  want[ny * 16 + nx] = 1;
                  grow = 1;
                end
              end
      end
      n_done = 0;
      @(negedge clk);
      center[0] = tf(cx); center[1] = tf(cy);
      start = 1;
      @(negedge clk) start = 0;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      cnt = 0;
      for (int b = 0; b < NBLK; b++) begin
        checks++;
        if (seen[b] != int'(want[b])) begin
          failures++;
          if (failures < 10) $display("trial %0d block %0d: dispatched %0d times, want %0d", trial, b,
            seen[b], want[b]);
        end
        cnt += int'(want[b]);
      end
      if (cnt > 20) n_big++;
      checks++;
      if (n_done != 1 || pend_blk.size() != 0) begin
        failures++;
        $display("trial %0d: done pulsed %0d times, %0d results pending", trial, n_done, pend_blk.size());
      end
    end
    checks++;
    if (n_masked_start == 0 || n_big == 0) begin
      failures++;
      $display("masked starts %0d, large footprints %0d", n_masked_start, n_big);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
