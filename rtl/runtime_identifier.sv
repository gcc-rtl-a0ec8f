// runtime_identifier: alpha-based Gaussian boundary identification (block level).
//
// For each Gaussian it walks the 16 x 16 grid of 8 x 8-pixel blocks breadth first,
// starting from the block that holds the projected centre (clamped to the nearest
// in-bounds block when the centre is off the sub-view). The status map S starts as a
// copy of the transmittance mask, so blocks already saturated are never visited. A
// block taken from the search queue Q is sent to the alpha array; when its result
// comes back and at least one of its pixels has alpha >= 1/255, its eight neighbours
// (p-17, p-16, p-15, p-1, p+1, p+15, p+16, p+17, without wrapping across rows) that
// are still unmarked in S are marked and pushed to Q. Because the footprint of a
// Gaussian is convex, blocks reachable only through failing blocks are never
// evaluated. `done` pulses when Q is empty and no result is outstanding.
// Interface: start + centre + tmask begin a Gaussian (only when idle); blk_valid /
// blk_ready hand out blocks; res_valid / res_blk / res_pass return results in any
// order. The start block is offered on blk in the cycle of `start`. Up to 8 queue
// writes happen in one cycle.
// The traversal follows Algorithm 1 and the fetch-mask of the paper at block level;
// the paper's region-to-edge pruning mark and its 16-Gaussian preload of S and Q are
// not built: one Gaussian is traversed at a time.
module runtime_identifier
  import gcc_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  fx_t [1:0]       center,
  input  logic [NBLK-1:0] tmask,
  output logic            busy,
  output logic            done,
  output logic            blk_valid,
  input  logic            blk_ready,
  output logic [BLKW-1:0] blk,
  input  logic            res_valid,
  input  logic [BLKW-1:0] res_blk,
  input  logic            res_pass
);
  logic [NBLK-1:0] smap;
  logic [BLKW-1:0] q [NBLK];
  logic [BLKW:0]   head, tail;
  logic [BLKW:0]   outstanding;
  logic            running;

  // start block: floor(centre / 8), clamped into the grid
  logic [3:0] cbx, cby;
  always_comb begin
    fx_t bx, by;
    bx = center[0] >>> (FX_F + 3);
    by = center[1] >>> (FX_F + 3);
    cbx = (bx < 0) ? 4'd0 : (bx > BPR - 1) ? 4'(BPR - 1) : 4'(bx);
    cby = (by < 0) ? 4'd0 : (by > BPR - 1) ? 4'(BPR - 1) : 4'(by);
  end

  // neighbours of a returning block
  logic [7:0]           nb_ok;
  logic [7:0][BLKW-1:0] nb;
  always_comb begin
    int rx, ry, k;
    rx = int'(res_blk[3:0]);
    ry = int'(res_blk[7:4]);
    k = 0;
    nb_ok = '0;
    nb = '0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++)
        if (!(dx == 0 && dy == 0)) begin
          int nx, ny;
          nx = rx + dx; ny = ry + dy;
          nb_ok[k] = (nx >= 0) && (nx < BPR) && (ny >= 0) && (ny < BPR);
          nb[k]    = BLKW'(ny * BPR + nx);
          k = k + 1;
        end
  end

  // the start block is handed out in the cycle of `start` itself
  logic first_ok;
  assign first_ok  = start && !running && !tmask[{cby, cbx}];
  assign blk_valid = (running && (head != tail)) || first_ok;
  assign blk       = running ? q[head[BLKW-1:0]] : {cby, cbx};
  assign busy      = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      smap <= '0; head <= '0; tail <= '0; outstanding <= '0; running <= 1'b0; done <= 1'b0;
      for (int e = 0; e < NBLK; e++) q[e] <= '0;
    end else begin
      logic [BLKW:0] t;
      logic [BLKW:0] o;
      logic [NBLK-1:0] s;
      done <= 1'b0;
      t = tail; o = outstanding; s = smap;
      if (start && !running) begin
        logic [BLKW-1:0] pc;
        pc = {cby, cbx};
        s = tmask;
        t = '0;
        o = '0;
        if (!tmask[pc]) begin
          s[pc] = 1'b1;
          q[0] <= pc;
          t = 1;
          running <= 1'b1;
          if (blk_ready) begin
            head <= 1;
            o = 1;
          end else head <= '0;
        end else begin
          head <= '0;
          done <= 1'b1;      // nothing left to render under this Gaussian
        end
      end else if (running) begin
        if (blk_valid && blk_ready) begin
          head <= head + 1'b1;
          o = o + 1'b1;
        end
        if (res_valid) begin
          o = o - 1'b1;
          if (res_pass)
            for (int k = 0; k < 8; k++)
              if (nb_ok[k] && !s[nb[k]]) begin
                s[nb[k]] = 1'b1;
                q[t[BLKW-1:0]] <= nb[k];
                t = t + 1'b1;
              end
        end
        if (o == 0 && t == ((blk_valid && blk_ready) ? head + 1'b1 : head)) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
      tail <= t;
      outstanding <= o;
      smap <= s;
    end
  end
endmodule
