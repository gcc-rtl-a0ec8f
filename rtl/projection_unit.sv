// projection_unit: Stage II of the pipeline (position and shape projection, culling).
//
// A 3D Gaussian enters; the shared MVM moves its mean into camera space
// (W * mu + t), the PPU projects the mean to pixel coordinates and supplies 1/z, the
// RU rebuilds Sigma and projects it to Sigma', and the SCU inverts Sigma', computes
// the opacity-aware radius and culls Gaussians that miss the sub-view. The result is
// a proj_t: centre, conic, ln w, view depth, radius and the visible flag. A TAGW-bit
// tag travels with each Gaussian (the controller uses it for the Gaussian's id and
// mean). Side data is carried in delay lines matched to each unit's latency.
// The MVM result is also brought out (cam_valid / cam_out, 1 cycle) so that the
// Stage I depth pass reuses this unit's MVM, as the paper does.
// Timing: one Gaussian per cycle, out_valid LAT = 22 cycles after in_valid.
// The unit order follows the paper's figure of the architecture; the latencies are
// this design's.
module projection_unit
  import gcc_pkg::*;
#(
  parameter int TAGW = 32,
  parameter int VIEW_PX = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  gauss3d_t        g,
  input  cam_t            cam,
  input  logic [TAGW-1:0] tag_in,
  output logic            out_valid,
  output proj_t           p,
  output logic [TAGW-1:0] tag_out,
  // camera-space mean straight from the shared MVM (1 cycle), used for Stage I depth
  output logic            cam_valid,
  output fx_t [2:0]       cam_out
);
  localparam int LAT_PPU = 6;
  localparam int LAT_RU  = 2;
  localparam int LAT_SCU = 13;

  // view transform
  logic      v_cam;
  fx_t [2:0] cpos;
  shared_mvm i_mvm (.clk, .rst_n, .in_valid, .mat(cam.view_rot), .vec(g.mu),
                    .bias(cam.view_t), .out_valid(v_cam), .res(cpos));
  fx_t [2:0] scale1;
  fx_t [3:0] quat1;
  fx_t       lnw1;
  logic [TAGW-1:0] tag1;
  delay_line #(.W(8*FX_W+TAGW), .D(1)) i_d0 (.clk,
    .din ({g.scale, g.quat, g.ln_w, tag_in}), .dout({scale1, quat1, lnw1, tag1}));

  // position projection
  logic      v_ppu;
  fx_t [1:0] mu2d;
  fx_t       inv_z;
  ppu i_ppu (.clk, .rst_n, .in_valid(v_cam), .cam(cpos), .focal(cam.focal),
             .center(cam.center), .out_valid(v_ppu), .mu2d, .inv_z);
  fx_t [2:0] scale2, cpos2;
  fx_t [3:0] quat2;
  fx_t       lnw2;
  logic [TAGW-1:0] tag2;
  delay_line #(.W(11*FX_W+TAGW), .D(LAT_PPU)) i_d1 (.clk,
    .din ({scale1, quat1, lnw1, cpos, tag1}), .dout({scale2, quat2, lnw2, cpos2, tag2}));

  // shape reconstruction and projection
  logic      v_ru;
  fx_t [2:0] cov2d;
  ru i_ru (.clk, .rst_n, .in_valid(v_ppu), .scale(scale2), .quat(quat2), .cam(cpos2),
           .inv_z, .view_rot(cam.view_rot), .focal(cam.focal), .out_valid(v_ru), .cov2d);
  fx_t [1:0] mu3;
  fx_t       lnw3, dep3;
  logic [TAGW-1:0] tag3;
  delay_line #(.W(4*FX_W+TAGW), .D(LAT_RU)) i_d2 (.clk,
    .din ({mu2d, lnw2, cpos2[2], tag2}), .dout({mu3, lnw3, dep3, tag3}));

  // screen culling
  logic      v_scu, vis;
  fx_t [2:0] conic;
  fx_t       radius;
  scu #(.VIEW_PX(VIEW_PX)) i_scu (.clk, .rst_n, .in_valid(v_ru), .mu2d(mu3), .cov2d,
    .ln_w(lnw3), .out_valid(v_scu), .visible(vis), .conic, .radius);
  fx_t [1:0] mu4;
  fx_t       lnw4, dep4;
  delay_line #(.W(4*FX_W+TAGW), .D(LAT_SCU)) i_d3 (.clk,
    .din ({mu3, lnw3, dep3, tag3}), .dout({mu4, lnw4, dep4, tag_out}));

  assign out_valid = v_scu;
  assign cam_valid = v_cam;
  assign cam_out   = cpos;
  always_comb begin
    p.mu2d    = mu4;
    p.conic   = conic;
    p.ln_w    = lnw4;
    p.depth   = dep4;
    p.radius  = radius;
    p.visible = vis;
  end
endmodule
