// blending_unit: the Blending Unit's 64 PEs and the transmittance mask.
//
// Takes one 8 x 8 block of alpha values with the Gaussian's colour c and updates the
// block in the image buffer, front to back (Eq. 4), per pixel:
//   skip if alpha < 1/255 or the pixel has already stopped (T = 0);
//   T' = T * (1 - alpha);  if T' < 0.0001 the pixel stops (T := 0, colour unchanged,
//   as in the 3DGS reference), else C += c * alpha * T and T := T'.
// When every pixel of a block has stopped, the block's bit in the transmittance mask
// T_mask is set; the identifier seeds its status map with it, so such blocks are
// excluded for all later Gaussians. T_mask is cleared with `clear`.
// Pipeline: accept (issue the image buffer read); stage 1 receives the block and
// forms T' and alpha*T; stage 2 accumulates the colour and writes the block back.
// A block equal to one still in stage 1 or 2 is held (in_ready low) until its earlier
// update is written, which keeps blending of the same block in Gaussian order; these
// ordering stalls are counted in `stalls`.
// Timing: one block per cycle when no stall. Arithmetic is Q0.16 with saturation.
// Update rule and mask follow the paper; formats, pipeline depth and the one-cycle
// stall are this design's.
module blending_unit
  import gcc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [BLKW-1:0]       in_blk,
  input  u16_t [NPIX-1:0]       in_alpha,
  input  u16_t [2:0]            in_rgb,
  // image buffer
  output logic                  ib_rd_en,
  output logic [BLKW-1:0]       ib_rd_addr,
  input  u16_t [2:0][NPIX-1:0]  ib_rd_c,
  input  u16_t [NPIX-1:0]       ib_rd_t,
  output logic                  ib_wr_en,
  output logic [BLKW-1:0]       ib_wr_addr,
  output u16_t [2:0][NPIX-1:0]  ib_wr_c,
  output u16_t [NPIX-1:0]       ib_wr_t,
  // status
  output logic [NBLK-1:0]       tmask,
  output logic                  busy,
  output logic [31:0]           stalls
);
  logic                s1_valid, s2_valid;
  logic [BLKW-1:0]     s1_blk, s2_blk;
  u16_t [NPIX-1:0]     s1_alpha;
  u16_t [2:0]          s1_rgb, s2_rgb;
  u16_t [2:0][NPIX-1:0] s2_c;
  u16_t [NPIX-1:0]     s2_t, s2_w;
  logic [NPIX-1:0]     s2_add;

  assign in_ready   = !((s1_valid && s1_blk == in_blk) || (s2_valid && s2_blk == in_blk));
  assign ib_rd_en   = in_valid && in_ready;
  assign ib_rd_addr = in_blk;
  assign busy       = s1_valid || s2_valid;

  // stage 1: new transmittance and weight alpha * T
  u16_t [NPIX-1:0] nt, nw;
  logic [NPIX-1:0] add;
  always_comb begin
    for (int e = 0; e < NPIX; e++) begin
      logic [31:0] tt;
      logic [16:0] inv_a;
      inv_a = 17'h10000 - 17'(s1_alpha[e]);
      tt = (32'(ib_rd_t[e]) * 32'(inv_a)) >> 16;
      nt[e]  = ib_rd_t[e];
      nw[e]  = '0;
      add[e] = 1'b0;
      if (s1_alpha[e] >= ALPHA_MIN && ib_rd_t[e] != 0) begin
        if (tt < 32'(T_MIN)) nt[e] = '0;            // pixel stops here
        else begin
          nt[e]  = tt[15:0];
          nw[e]  = 16'((32'(s1_alpha[e]) * 32'(ib_rd_t[e])) >> 16);
          add[e] = 1'b1;
        end
      end
    end
  end

  // stage 2: colour accumulation
  u16_t [2:0][NPIX-1:0] nc;
  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int e = 0; e < NPIX; e++) begin
      for (int ch = 0; ch < 3; ch++) begin
        logic [32:0] acc;
        acc = 33'(s2_c[ch][e]) + 33'((32'(s2_rgb[ch]) * 32'(s2_w[e])) >> 16);
        nc[ch][e] = (!s2_add[e]) ? s2_c[ch][e] : (acc > 33'hFFFF) ? 16'hFFFF : acc[15:0];
      end
      if (s2_t[e] >= T_MIN) all_done = 1'b0;
    end
  end

  assign ib_wr_en   = s2_valid;
  assign ib_wr_addr = s2_blk;
  assign ib_wr_c    = nc;
  assign ib_wr_t    = s2_t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_blk <= '0; s1_alpha <= '0; s1_rgb <= '0;
      s2_valid <= 1'b0; s2_blk <= '0; s2_rgb <= '0; s2_c <= '0; s2_t <= '0; s2_w <= '0;
      s2_add <= '0; tmask <= '0; stalls <= '0;
    end else begin
      s1_valid <= in_valid && in_ready;
      if (in_valid && in_ready) begin
        s1_blk   <= in_blk;
        s1_alpha <= in_alpha;
        s1_rgb   <= in_rgb;
      end
      s2_valid <= s1_valid;
      if (s1_valid) begin
        s2_blk <= s1_blk;
        s2_rgb <= s1_rgb;
        s2_c   <= ib_rd_c;
        s2_t   <= nt;
        s2_w   <= nw;
        s2_add <= add;
      end
      if (in_valid && !in_ready) stalls <= stalls + 1;
      if (clear) tmask <= '0;
      else if (s2_valid && all_done) tmask[s2_blk] <= 1'b1;
    end
  end

  // The image buffer must not see a read of a block whose update is still in flight.
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(ib_rd_en && ((s1_valid && ib_rd_addr == s1_blk) ||
                                  (s2_valid && ib_rd_addr == s2_blk))));
endmodule
