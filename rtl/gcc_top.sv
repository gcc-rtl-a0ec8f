// gcc_top: GCC, a Gaussian-wise 3D Gaussian Splatting renderer with cross-stage
// conditional processing, for one camera view.
//
// The controller in this module runs, for every 128 x 128 sub-view of the image:
//  1. clear the image buffer, the transmittance mask and the group counters;
//  2. Stage I: stream every Gaussian's record, take its view depth from the
//     Projection Unit's MVM, group it with the RCA and write (id, depth) to the
//     group's list in DRAM at address grp * GROUP_N + slot;
//  3. for each depth group, nearest first: read its list, fetch and project its
//     Gaussians (Stage II), keep the visible ones in the Shared Buffer and sort them
//     by depth (Stage III sort);
//  4. render them one by one (Gaussian-wise): fetch SH coefficients into the SH
//     Buffer, colour them in the SH Unit, then let the identifier walk the blocks the
//     Gaussian covers through the Alpha array into the Blending Unit (Stage IV).
//     While one Gaussian's blocks are being walked, the next Gaussian's record and
//     SH coefficients are fetched and coloured, so that the identifier can start on
//     it as soon as it is free. If the start block of a Gaussian is already
//     saturated the Gaussian is skipped;
//  5. as soon as every block of the sub-view is saturated (all T_mask bits set), skip
//     all remaining Gaussians and groups: no SH fetch, projection or blending is done
//     for them (cross-stage conditional processing);
//  6. write the sub-view's blocks out.
// If the image is larger than one sub-view the controller loops over sub-views
// (compatibility mode), shifting the principal point for each.
//
// DRAM side: four request/response channels (Gaussian records, SH coefficients,
// group-list read, group-list write) and the image output. Requests are always
// accepted; responses return in request order with any latency. No backpressure.
// Counters report how often each mechanism acted.
//
// From the paper: the unit set, the stage order, N = 256, the 8 x 8 block array,
// the 128 x 128 sub-view and the early termination. This design's own: the channel
// protocol, processing groups one after another (the next group is not prefetched
// while the current one renders), one Gaussian walked by the identifier at a time
// with only the next one prefetched, and running
// Stage I again per sub-view instead of a 2D spatial binning.
module gcc_top
  import gcc_pkg::*;
#(
  parameter int NPIV = 15,
  parameter int GROUP_N = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  cam_t                 cam,
  input  logic [15:0]          img_w,
  input  logic [15:0]          img_h,
  input  logic [31:0]          num_gauss,
  input  fx_t [NPIV-1:0]       pivots,
  output logic                 busy,
  output logic                 done,
  // Gaussian records
  output logic                 g_req_valid,
  output logic [31:0]          g_req_id,
  input  logic                 g_rsp_valid,
  input  gauss3d_t             g_rsp_data,
  // SH coefficients
  output logic                 sh_req_valid,
  output logic [31:0]          sh_req_id,
  input  logic                 sh_rsp_valid,
  input  sh_t                  sh_rsp_data,
  // group lists
  output logic                 gl_wr_valid,
  output logic [31:0]          gl_wr_addr,
  output logic [31:0]          gl_wr_id,
  output fx_t                  gl_wr_depth,
  output logic                 gl_rd_valid,
  output logic [31:0]          gl_rd_addr,
  input  logic                 gl_rsp_valid,
  input  logic [31:0]          gl_rsp_id,
  input  fx_t                  gl_rsp_depth,
  // image output, one 8 x 8 block per beat
  output logic                 img_valid,
  output logic [15:0]          img_x,
  output logic [15:0]          img_y,
  output u16_t [2:0][NPIX-1:0] img_rgb,
  // event counters
  output logic [31:0]          n_stage1_culled,
  output logic [31:0]          n_group_dropped,
  output logic [31:0]          n_screen_culled,
  output logic [31:0]          n_rendered,
  output logic [31:0]          n_alpha_blocks,
  output logic [31:0]          n_blend_blocks,
  output logic [31:0]          n_skipped_gauss,
  output logic [31:0]          n_skipped_groups,
  output logic [31:0]          n_order_stalls,
  output logic [31:0]          n_subviews,
  output logic                 cmode,
  output logic                 group_overflow
);
  localparam int NGRP = NPIV + 1;
  localparam int IW   = $clog2(GROUP_N);
  localparam int CNTW = $clog2(GROUP_N + 1);
  localparam int TAGW = 32 + 3*FX_W;
  localparam int SBW  = 32 + 3*FX_W + $bits(proj_t);

  typedef enum logic [4:0] {
    T_IDLE, T_CLR, T_CLRW, T_S1, T_GRP, T_GLOAD, T_SORT, T_RFETCH, T_RREAD, T_RSH,
    T_RSHW, T_RSHR, T_RSHV, T_RSHO, T_RBLEND, T_GEND, T_OUT, T_NEXT, T_DONE
  } st_t;
  st_t st;

  // ---------------- sub-view bookkeeping ----------------
  logic [15:0] ntx, nty, tx, ty;
  assign ntx = (img_w + 16'(VIEW - 1)) >> $clog2(VIEW);
  assign nty = (img_h + 16'(VIEW - 1)) >> $clog2(VIEW);
  cam_t cam_v;
  always_comb begin
    cam_v = cam;
    cam_v.center[0] = cam.center[0] - (fx_t'(tx) <<< (FX_F + $clog2(VIEW)));
    cam_v.center[1] = cam.center[1] - (fx_t'(ty) <<< (FX_F + $clog2(VIEW)));
  end

  // ---------------- counters / indices ----------------
  logic [31:0]       iss, rsp_cnt, s1_done_cnt, s1_pu_cnt;
  logic [$clog2(NGRP+1)-1:0] g;
  logic [CNTW-1:0]   gn, lcnt, pcnt, vcnt, r;
  logic [CNTW-1:0]   lcnt_rsp;  // position of the next group-list response inside the group
  logic [BLKW:0]     ob;
  logic              ob_v;
  logic [BLKW-1:0]   ob_blk;

  // ---------------- Projection Unit (also Stage I depth) ----------------
  logic            pu_in_valid, pu_out_valid, pu_cam_valid;
  proj_t           pu_p;
  logic [TAGW-1:0] pu_tag_in, pu_tag_out;
  fx_t [2:0]       pu_cam;
  logic [31:0]     g_rsp_id;     // id of the record now arriving
  logic [31:0]     load_ids [GROUP_N];

  assign pu_in_valid = g_rsp_valid && (st == T_S1 || st == T_GLOAD);
  assign pu_tag_in   = {g_rsp_id, g_rsp_data.mu};
  projection_unit #(.TAGW(TAGW), .VIEW_PX(VIEW)) i_pu (
    .clk, .rst_n, .in_valid(pu_in_valid), .g(g_rsp_data), .cam(cam_v), .tag_in(pu_tag_in),
    .out_valid(pu_out_valid), .p(pu_p), .tag_out(pu_tag_out),
    .cam_valid(pu_cam_valid), .cam_out(pu_cam));

  // ---------------- RCA ----------------
  logic                 rca_clear, rca_v, rca_culled, rca_dropped;
  logic [$clog2(NPIV+1)-1:0] rca_grp;
  logic [CNTW-1:0]      rca_slot;
  logic [NPIV:0][CNTW-1:0] rca_counts;
  logic [31:0]          s1_id_q, s1_id_q2;
  rca #(.NPIV(NPIV), .GROUP_N(GROUP_N)) i_rca (
    .clk, .rst_n, .clear(rca_clear), .pivots, .in_valid(pu_cam_valid && st == T_S1),
    .depth(pu_cam[2]), .out_valid(rca_v), .culled(rca_culled), .dropped(rca_dropped),
    .grp(rca_grp), .slot(rca_slot), .counts(rca_counts), .overflow(group_overflow));
  fx_t s1_depth_q;
  always_ff @(posedge clk) begin
    s1_id_q    <= g_rsp_id;
    s1_id_q2   <= s1_id_q;
    s1_depth_q <= pu_cam[2];
  end
  assign gl_wr_valid = rca_v && !rca_culled && !rca_dropped;
  assign gl_wr_addr  = 32'(rca_grp) * GROUP_N + 32'(rca_slot);
  assign gl_wr_id    = s1_id_q2;
  assign gl_wr_depth = s1_depth_q;

  // ---------------- Shared Buffer and Sort Unit ----------------
  logic            sb_swap, sb_wsel, sb_wr, sb_rd;
  logic [SBW-1:0]  sb_wdata, sb_rdata;
  logic [IW-1:0]   sb_waddr, sb_raddr;
  pingpong_buffer #(.W(SBW), .DEPTH(GROUP_N)) i_shared_buf (
    .clk, .rst_n, .swap(sb_swap), .wsel(sb_wsel), .wr_en(sb_wr), .wr_addr(sb_waddr),
    .wr_data(sb_wdata), .rd_en(sb_rd), .rd_addr(sb_raddr), .rd_data(sb_rdata));

  logic            so_clear, so_start, so_busy, so_done;
  logic [CNTW-1:0] so_count;
  logic [IW-1:0]   so_rd_idx;
  fx_t             so_rd_key;
  sort_unit #(.MAXN(GROUP_N)) i_sort (
    .clk, .rst_n, .clear(so_clear), .load_valid(sb_wr), .load_key(pu_p.depth),
    .load_idx(vcnt[IW-1:0]), .start(so_start), .busy(so_busy), .done(so_done),
    .count(so_count), .rd_addr(r[IW-1:0]), .rd_idx(so_rd_idx), .rd_key(so_rd_key));

  assign sb_wr    = pu_out_valid && st == T_GLOAD && pu_p.visible;
  assign sb_waddr = vcnt[IW-1:0];
  assign sb_wdata = {pu_tag_out, pu_p};
  assign sb_raddr = so_rd_idx;
  assign sb_rd    = (st == T_RFETCH);

  // Gaussian being fetched and coloured (f_*) and Gaussian being rendered (cur_*):
  // the next Gaussian's SH fetch and colour overlap the current one's blocks.
  logic [31:0] f_id;
  fx_t [2:0]   f_mu;
  proj_t       f_p, cur_p, gp_sel;
  u16_t [2:0]  f_rgb, cur_rgb, rgb_sel;

  // ---------------- SH Buffer and SH Unit ----------------
  logic sh_swap, sh_wsel, shu_out_valid;
  sh_t  shb_rdata;
  u16_t [2:0] shu_rgb;
  pingpong_buffer #(.W($bits(sh_t)), .DEPTH(2)) i_sh_buf (
    .clk, .rst_n, .swap(sh_swap), .wsel(sh_wsel), .wr_en(sh_rsp_valid && st == T_RSHW),
    .wr_addr(1'b0), .wr_data(sh_rsp_data), .rd_en(st == T_RSHR), .rd_addr(1'b0),
    .rd_data(shb_rdata));
  assign sh_swap = sh_rsp_valid && st == T_RSHW;
  sh_unit i_sh (.clk, .rst_n, .in_valid(st == T_RSHV), .mu(f_mu), .cam_pos(cam.cam_pos),
                .sh(shb_rdata), .out_valid(shu_out_valid), .rgb(shu_rgb));

  // ---------------- Identifier, Alpha array, Blending, Image buffer ----------------
  logic            id_start, id_busy, id_done, id_blk_valid, id_blk_ready;
  logic [BLKW-1:0] id_blk;
  logic            aa_out_valid, aa_out_ready, aa_any;
  logic [BLKW-1:0] aa_blk;
  u16_t [NPIX-1:0] aa_alpha;
  logic [NPIX-1:0] aa_pass;
  u16_t [2:0]      aa_rgb;
  logic            bl_in_ready, bl_busy, bl_clear;
  logic [NBLK-1:0] tmask;
  logic            ib_clear, ib_busy, ib_rd_en, ib_wr_en, bl_rd_en;
  logic [BLKW-1:0] ib_rd_addr, ib_wr_addr, bl_rd_addr;
  u16_t [2:0][NPIX-1:0] ib_rd_c, ib_wr_c;
  u16_t [NPIX-1:0] ib_rd_t, ib_wr_t;

  assign id_start = (st == T_RBLEND) && !id_busy;
  assign gp_sel  = id_start ? f_p : cur_p;
  assign rgb_sel = id_start ? f_rgb : cur_rgb;
  runtime_identifier i_ident (
    .clk, .rst_n, .start(id_start), .center(f_p.mu2d), .tmask, .busy(id_busy),
    .done(id_done), .blk_valid(id_blk_valid), .blk_ready(id_blk_ready), .blk(id_blk),
    .res_valid(aa_out_valid && aa_out_ready), .res_blk(aa_blk), .res_pass(aa_any));

  alpha_array i_alpha (
    .clk, .rst_n, .in_valid(id_blk_valid), .in_ready(id_blk_ready), .in_blk(id_blk),
    .gp(gp_sel), .in_rgb(rgb_sel), .out_valid(aa_out_valid), .out_ready(aa_out_ready),
    .out_blk(aa_blk), .alpha(aa_alpha), .pass(aa_pass), .any_pass(aa_any), .out_rgb(aa_rgb));
  // only blocks with at least one alpha >= 1/255 go on to blending
  assign aa_out_ready = !aa_any || bl_in_ready;

  blending_unit i_blend (
    .clk, .rst_n, .clear(bl_clear), .in_valid(aa_out_valid && aa_any), .in_ready(bl_in_ready),
    .in_blk(aa_blk), .in_alpha(aa_alpha), .in_rgb(aa_rgb),
    .ib_rd_en(bl_rd_en), .ib_rd_addr(bl_rd_addr), .ib_rd_c, .ib_rd_t,
    .ib_wr_en, .ib_wr_addr, .ib_wr_c, .ib_wr_t,
    .tmask, .busy(bl_busy), .stalls(n_order_stalls));

  assign ib_rd_en   = (st == T_OUT) ? (ob < (BLKW+1)'(NBLK)) : bl_rd_en;
  assign ib_rd_addr = (st == T_OUT) ? ob[BLKW-1:0] : bl_rd_addr;
  image_buffer i_img (
    .clk, .rst_n, .clear(ib_clear), .busy(ib_busy), .rd_en(ib_rd_en), .rd_addr(ib_rd_addr),
    .rd_c(ib_rd_c), .rd_t(ib_rd_t), .wr_en(ib_wr_en), .wr_addr(ib_wr_addr),
    .wr_c(ib_wr_c), .wr_t(ib_wr_t));

  // image output
  assign img_valid = ob_v;
  assign img_x     = 16'((tx << $clog2(VIEW)) + 16'(ob_blk[3:0]) * 16'(BN));
  assign img_y     = 16'((ty << $clog2(VIEW)) + 16'(ob_blk[7:4]) * 16'(BN));
  assign img_rgb   = ib_rd_c;

  // ---------------- DRAM request muxing ----------------
  always_comb begin
    g_req_valid = 1'b0;
    g_req_id    = '0;
    if (st == T_S1 && iss < num_gauss) begin
      g_req_valid = 1'b1;
      g_req_id    = iss;
    end else if (st == T_GLOAD && gl_rsp_valid) begin
      g_req_valid = 1'b1;
      g_req_id    = gl_rsp_id;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lcnt_rsp <= '0;
    else if (st == T_GRP) lcnt_rsp <= '0;
    else if (st == T_GLOAD && gl_rsp_valid) lcnt_rsp <= lcnt_rsp + 1'b1;
  end

  assign gl_rd_valid  = (st == T_GLOAD) && (lcnt < gn);
  assign gl_rd_addr   = 32'(g) * GROUP_N + 32'(lcnt);
  assign sh_req_valid = (st == T_RSH);
  assign sh_req_id    = sb_rdata[SBW-1 -: 32];   // id of the entry now being read
  assign g_rsp_id     = (st == T_S1) ? rsp_cnt : load_ids[rsp_cnt[IW-1:0]];

  assign rca_clear = (st == T_CLR);
  assign ib_clear  = (st == T_CLR);
  assign bl_clear  = (st == T_CLR);
  assign so_clear  = (st == T_GRP);
  assign so_start  = (st == T_GLOAD) && (pcnt == gn) && !so_busy;
  assign sb_swap   = so_done;
  assign busy      = (st != T_IDLE);
  assign cmode     = (ntx > 1) || (nty > 1);

  // ---------------- controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; done <= 1'b0; tx <= '0; ty <= '0;
      iss <= '0; rsp_cnt <= '0; s1_done_cnt <= '0; s1_pu_cnt <= '0; g <= '0; gn <= '0; lcnt <= '0;
      pcnt <= '0; vcnt <= '0; r <= '0; ob <= '0; ob_v <= 1'b0; ob_blk <= '0;
      f_id <= '0; f_mu <= '0; f_p <= '0; f_rgb <= '0; cur_p <= '0; cur_rgb <= '0;
      n_stage1_culled <= '0; n_group_dropped <= '0; n_screen_culled <= '0;
      n_rendered <= '0; n_alpha_blocks <= '0; n_blend_blocks <= '0;
      n_skipped_gauss <= '0; n_skipped_groups <= '0; n_subviews <= '0;
    end else begin
      done <= 1'b0;
      ob_v <= 1'b0;
      // event counters that run in any state
      if (rca_v && rca_culled)  n_stage1_culled <= n_stage1_culled + 1;
      if (rca_v && rca_dropped) n_group_dropped <= n_group_dropped + 1;
      if (pu_out_valid && st == T_GLOAD && !pu_p.visible) n_screen_culled <= n_screen_culled + 1;
      if (id_blk_valid && id_blk_ready) n_alpha_blocks <= n_alpha_blocks + 1;
      if (aa_out_valid && aa_any && bl_in_ready) n_blend_blocks <= n_blend_blocks + 1;

      case (st)
        T_IDLE: if (start) begin
          tx <= '0; ty <= '0;
          n_stage1_culled <= '0; n_group_dropped <= '0; n_screen_culled <= '0;
          n_rendered <= '0; n_alpha_blocks <= '0; n_blend_blocks <= '0;
          n_skipped_gauss <= '0; n_skipped_groups <= '0; n_subviews <= '0;
          st <= T_CLR;
        end
        T_CLR: st <= T_CLRW;
        T_CLRW: if (!ib_busy) begin
          iss <= '0; rsp_cnt <= '0; s1_done_cnt <= '0; s1_pu_cnt <= '0;
          st <= T_S1;
        end
        // ---- Stage I: depth and grouping ----
        T_S1: begin
          if (iss < num_gauss) iss <= iss + 1;
          if (g_rsp_valid) rsp_cnt <= rsp_cnt + 1;
          if (rca_v) s1_done_cnt <= s1_done_cnt + 1;
          if (pu_out_valid) s1_pu_cnt <= s1_pu_cnt + 1;
          // wait until the projection pipeline has drained the Stage I records too
          if (s1_done_cnt == num_gauss && s1_pu_cnt == num_gauss) begin
            g <= '0;
            st <= T_GRP;
          end
        end
        // ---- next depth group ----
        T_GRP: begin
          if (int'(g) >= NGRP) st <= T_OUT;
          else if (&tmask) begin
            // every block saturated: no later group can contribute
            n_skipped_groups <= n_skipped_groups + 32'(NGRP - int'(g));
            st <= T_OUT;
          end else if (rca_counts[g] == 0) begin
            g <= g + 1'b1;
          end else begin
            gn <= rca_counts[g];
            lcnt <= '0; pcnt <= '0; vcnt <= '0; rsp_cnt <= '0;
            st <= T_GLOAD;
          end
        end
        // ---- Stage II for the group: list read, record fetch, projection ----
        T_GLOAD: begin
          if (gl_rd_valid) lcnt <= lcnt + 1'b1;
          if (gl_rsp_valid) load_ids[lcnt_rsp[IW-1:0]] <= gl_rsp_id;
          if (g_rsp_valid) rsp_cnt <= rsp_cnt + 1;
          if (pu_out_valid) begin
            pcnt <= pcnt + 1'b1;
            if (pu_p.visible) vcnt <= vcnt + 1'b1;
          end
          if (so_start) st <= T_SORT;
        end
        T_SORT: if (so_done) begin
          r <= '0;
          st <= T_RFETCH;
        end
        // ---- Gaussian-wise rendering ----
        T_RFETCH: begin
          if (r == vcnt) st <= T_GEND;
          else if (&tmask) begin
            // cross-stage skip: no SH fetch or blending for the rest of the group
            n_skipped_gauss <= n_skipped_gauss + 32'(vcnt - r);
            st <= T_GEND;
          end else st <= T_RREAD;
        end
        T_RREAD: st <= T_RSH;   // shared buffer read in flight
        T_RSH: begin
          {f_id, f_mu, f_p} <= sb_rdata;
          st <= T_RSHW;
        end
        T_RSHW: if (sh_rsp_valid) st <= T_RSHR;
        T_RSHR: st <= T_RSHV;
        T_RSHV: st <= T_RSHO;
        T_RSHO: if (shu_out_valid) begin
          f_rgb <= shu_rgb;
          st <= T_RBLEND;
        end
        // hand the coloured Gaussian to the identifier as soon as it is free
        T_RBLEND: if (!id_busy) begin
          cur_p   <= f_p;
          cur_rgb <= f_rgb;
          n_rendered <= n_rendered + 1;
          r <= r + 1'b1;
          st <= T_RFETCH;
        end
        // group finished once its last Gaussian has left the render pipeline
        T_GEND: if (!id_busy && !aa_out_valid && !bl_busy) begin
          g <= g + 1'b1;
          st <= T_GRP;
        end
        // ---- write the sub-view out ----
        T_OUT: begin
          if (ob < (BLKW+1)'(NBLK)) begin
            ob_v   <= 1'b1;
            ob_blk <= ob[BLKW-1:0];
            ob     <= ob + 1'b1;
          end else if (!ob_v) begin
            ob <= '0;
            st <= T_NEXT;
          end
        end
        T_NEXT: begin
          n_subviews <= n_subviews + 1;
          if (tx + 1 < ntx) begin
            tx <= tx + 1'b1; st <= T_CLR;
          end else if (ty + 1 < nty) begin
            tx <= '0; ty <= ty + 1'b1; st <= T_CLR;
          end else st <= T_DONE;
        end
        T_DONE: begin
          done <= 1'b1;
          st <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

endmodule
