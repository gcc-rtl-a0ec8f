// tb_blending_unit: checks the Blending Unit and its transmittance mask.
// The testbench models the image buffer (one-cycle read latency) with random colours
// and transmittances, some already near zero. Random alpha blocks with random
// colours are offered for a few hot blocks, so that the same block often follows
// itself and the ordering stall must engage. A reference image is updated here in
// acceptance order with the front-to-back rule (alpha < 1/255 or stopped pixel:
// unchanged; T' = T(1 - alpha) below 1e-4: pixel stops; else C += c alpha T and
// T := T', all in Q0.16 with truncation and saturation). Checked: every write-back
// equals the reference and comes exactly 2 cycles after its block was accepted; the
// final buffer and T_mask equal the reference; stalls occurred and were counted;
// `clear` empties the mask.
module tb_blending_unit;
  import gcc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 clear, in_valid, in_ready, ib_rd_en, ib_wr_en, busy;
  logic [BLKW-1:0]      in_blk, ib_rd_addr, ib_wr_addr;
  u16_t [NPIX-1:0]      in_alpha, ib_rd_t, ib_wr_t;
  u16_t [2:0]           in_rgb;
  u16_t [2:0][NPIX-1:0] ib_rd_c, ib_wr_c;
  logic [NBLK-1:0]      tmask;
  logic [31:0]          stalls;
  int checks = 0, failures = 0, cyc = 0, n_held = 0;

  u16_t [2:0][NPIX-1:0] mem_c [NBLK], ref_c [NBLK];
  u16_t [NPIX-1:0]      mem_t [NBLK], ref_t [NBLK];
  logic [NBLK-1:0]      ref_mask;
  logic [BLKW-1:0]      q_blk [$];
  int                   q_cyc [$];
  u16_t [2:0][NPIX-1:0] q_c [$];
  u16_t [NPIX-1:0]      q_t [$];

  blending_unit dut (.clk, .rst_n, .clear, .in_valid, .in_ready, .in_blk, .in_alpha, .in_rgb,
    .ib_rd_en, .ib_rd_addr, .ib_rd_c, .ib_rd_t, .ib_wr_en, .ib_wr_addr, .ib_wr_c, .ib_wr_t,
    .tmask, .busy, .stalls);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // image buffer model
  always @(posedge clk) begin
    if (ib_rd_en) begin
      ib_rd_c <= mem_c[ib_rd_addr];
      ib_rd_t <= mem_t[ib_rd_addr];
    end
    if (ib_wr_en) begin
      mem_c[ib_wr_addr] <= ib_wr_c;
      mem_t[ib_wr_addr] <= ib_wr_t;
    end
  end

  // reference update at acceptance, and write-back check
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_held++;
    if (in_valid && in_ready) begin
      bit all_low;
      all_low = 1;
      for (int e = 0; e < NPIX; e++) begin
        longint a, t, tt, w;
        a = longint'(in_alpha[e]); t = longint'(ref_t[in_blk][e]);
        if (a >= longint'(ALPHA_MIN) && t != 0) begin
          tt = (t * (65536 - a)) >>> 16;
          if (tt < longint'(T_MIN)) ref_t[in_blk][e] = '0;
          else begin
            w = (a * t) >>> 16;
            ref_t[in_blk][e] = u16_t'(tt);
            for (int ch = 0; ch < 3; ch++) begin
              longint c;
              c = longint'(ref_c[in_blk][ch][e]) + ((longint'(in_rgb[ch]) * w) >>> 16);
              ref_c[in_blk][ch][e] = (c > 65535) ? 16'hFFFF : u16_t'(c);
            end
          end
        end
        if (ref_t[in_blk][e] >= T_MIN) all_low = 0;
      end
      if (all_low) ref_mask[in_blk] = 1'b1;
      q_blk.push_back(in_blk); q_cyc.push_back(cyc); q_c.push_back(ref_c[in_blk]); q_t.push_back(ref_t[in_blk]);
    end
    if (ib_wr_en) begin
      checks++;
      if (q_blk.size() == 0) begin
        failures++;
        $display("unexpected write-back");
      end else begin
        logic [BLKW-1:0] b;
        u16_t [2:0][NPIX-1:0] c;
        u16_t [NPIX-1:0] t;
        int c0;
        b = q_blk.pop_front(); c0 = q_cyc.pop_front(); c = q_c.pop_front(); t = q_t.pop_front();
        if (ib_wr_addr != b || cyc - c0 != 2 || ib_wr_c != c || ib_wr_t != t) begin
          failures++;
          if (failures < 10) $display("write-back of block %0d (want %0d) after %0d cycles: data %s",
            ib_wr_addr, b, cyc - c0, (ib_wr_c == c && ib_wr_t == t) ? "ok" : "wrong");
        end
      end
    end
  end

  initial begin
    logic [BLKW-1:0] hot [4];
    clear = 0; in_valid = 0; in_blk = '0; in_alpha = '0; in_rgb = '0; ref_mask = '0;
    ib_rd_c = '0; ib_rd_t = '0;
    for (int b = 0; b < NBLK; b++) begin
      for (int e = 0; e < NPIX; e++) begin
        int r;
        r = $urandom_range(0, 9);
        mem_t[b][e] = (r == 0) ? 16'd0 : (r == 1) ? u16_t'($urandom_range(7, 40)) : u16_t'($urandom);
        for (int ch = 0; ch < 3; ch++) mem_c[b][ch][e] = u16_t'($urandom_range(0, 30000));
      end
      ref_c[b] = mem_c[b]; ref_t[b] = mem_t[b];
    end
    for (int k = 0; k < 4; k++) hot[k] = BLKW'($urandom_range(0, NBLK - 1));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = ($urandom_range(0, 5) != 0);
        in_blk = ($urandom_range(0, 2) != 0) ? hot[$urandom_range(0, 3)] : BLKW'($urandom_range(0, NBLK - 1));
        for (int e = 0; e < NPIX; e++) begin
          int r;
          r = $urandom_range(0, 9);
          in_alpha[e] = (r == 0) ? u16_t'($urandom_range(0, 300)) :
                        (r == 1) ? ALPHA_CAP : u16_t'($urandom_range(0, 40000));
        end
        in_rgb = {u16_t'($urandom), u16_t'($urandom), u16_t'($urandom)};
      end
    end
    @(negedge clk);
    while (in_valid && !in_ready) @(negedge clk);
    in_valid = 0;
    repeat (4) @(negedge clk);
    for (int b = 0; b < NBLK; b++) begin
      checks++;
      if (mem_c[b] != ref_c[b] || mem_t[b] != ref_t[b]) begin
        failures++;
        if (failures < 10) $display("block %0d differs from the reference at the end", b);
      end
    end
    checks++;
    if (tmask != ref_mask || ref_mask == '0) begin
      failures++;
      $display("tmask differs from the reference (or never set)");
    end
    checks++;
    if (int'(stalls) != n_held || n_held == 0 || busy) begin
      failures++;
      $display("stalls %0d, held cycles seen %0d, busy %0d", stalls, n_held, busy);
    end
    clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (tmask != '0) begin
      failures++;
      $display("clear left the mask set");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
