// scu: Screen Culling Unit.
//
// From the projected covariance Sigma' = [a b; b c] it computes
//   det = ac - b^2, conic = (c, -b, a) / det        (Sigma'^-1 for the Alpha Unit)
//   lambda_max = (a+c)/2 + sqrt(((a+c)/2)^2 - det)  (largest eigenvalue)
//   r = ceil(sqrt(2 * ln(255 w) * lambda_max))      (the opacity-aware radius, Eq. 8)
// and marks the Gaussian invisible if det <= 0, if ln(255 w) <= 0 (its alpha can never
// reach 1/255) or if the square [mu' - r, mu' + r] misses the VIEW x VIEW sub-view.
// ln w arrives precomputed in log space as in the paper; ln 255 is added here.
// Two divide/sqrt pools work in parallel (1/det, kept with 12 extra fraction bits,
// and the eigenvalue root), a third
// takes the radius root. Timing: out_valid LAT = 13 cycles after in_valid, one
// Gaussian per cycle. Formulas follow the paper; the pipeline split is this design's.
module scu
  import gcc_pkg::*;
#(
  parameter int VIEW_PX = 128
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  fx_t [1:0] mu2d,
  input  fx_t [2:0] cov2d,
  input  fx_t       ln_w,
  output logic      out_valid,
  output logic      visible,
  output fx_t [2:0] conic,
  output fx_t       radius
);
  localparam int  PL = 5;                    // divsqrt_pool latency
  localparam fx_t LN255 = fx_c(5.541263545158426);
  // 1/det is formed with INV_SH extra fraction bits: for large footprints det reaches
  // 1e5 and a plain fx_t reciprocal would keep only a few significant bits.
  localparam int  INV_SH = 12;

  function automatic fx_t mul_inv(input fx_t v, input fx_t inv_s);
    logic signed [2*FX_W-1:0] ve, ie, p;
    ve = v; ie = inv_s;
    p = ve * ie;
    return fx_sat(p >>> (FX_F + INV_SH));
  endfunction

  // ---- stage 0: det, mid, discriminant, opacity term ----
  logic v0;
  fx_t  det0, mid0, disc0, lw0;
  fx_t [2:0] cov0;
  fx_t [1:0] mu0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; det0 <= '0; mid0 <= '0; disc0 <= '0; lw0 <= '0; cov0 <= '0; mu0 <= '0;
    end else begin
      fx_t d, mid, disc;
      v0 <= in_valid;
      d    = fx_mul(cov2d[0], cov2d[2]) - fx_mul(cov2d[1], cov2d[1]);
      mid  = fx_add(cov2d[0], cov2d[2]) >>> 1;
      disc = fx_mul(mid, mid) - d;
      det0  <= d;
      mid0  <= mid;
      disc0 <= (disc < 0) ? '0 : disc;
      lw0   <= fx_add(ln_w, LN255);
      cov0  <= cov2d;
      mu0   <= mu2d;
    end
  end

  // ---- stage 1: 1/det and sqrt(disc) ----
  logic v1a, v1b;
  fx_t  inv_det, root_disc;
  divsqrt_pool i_inv (.clk, .rst_n, .in_valid(v0), .in_sqrt(1'b0), .a(FX_ONE <<< INV_SH), .b(det0),
                      .tag_in(1'b0), .out_valid(v1a), .res(inv_det), .tag_out());
  divsqrt_pool i_eig (.clk, .rst_n, .in_valid(v0), .in_sqrt(1'b1), .a(disc0), .b('0),
                      .tag_in(1'b0), .out_valid(v1b), .res(root_disc), .tag_out());

  fx_t det1, mid1, lw1, pad1;
  fx_t [2:0] cov1;
  fx_t [1:0] mu1;
  delay_line #(.W(6*FX_W+2*FX_W+FX_W), .D(PL)) i_d1 (.clk,
    .din ({det0, mid0, lw0, cov0, mu0, {FX_W{1'b0}}}),
    .dout({det1, mid1, lw1, cov1, mu1, /*unused*/ pad1}));

  // ---- stage 2: radius argument and conic ----
  logic v2;
  fx_t  arg2, det2, lw2;
  fx_t [2:0] conic2;
  fx_t [1:0] mu2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; arg2 <= '0; det2 <= '0; lw2 <= '0; conic2 <= '0; mu2 <= '0;
    end else begin
      fx_t lam;
      v2 <= v1a;
      lam  = fx_add(mid1, root_disc);
      arg2 <= fx_mul(lw1 <<< 1, lam);
      det2 <= det1;
      lw2  <= lw1;
      conic2[0] <= mul_inv(cov1[2], inv_det);
      conic2[1] <= -mul_inv(cov1[1], inv_det);
      conic2[2] <= mul_inv(cov1[0], inv_det);
      mu2  <= mu1;
    end
  end

  // ---- stage 3: radius root ----
  logic v3;
  fx_t  root_r;
  divsqrt_pool i_rad (.clk, .rst_n, .in_valid(v2), .in_sqrt(1'b1), .a(arg2), .b('0),
                      .tag_in(1'b0), .out_valid(v3), .res(root_r), .tag_out());
  fx_t det3, lw3, pad3;
  fx_t [2:0] conic3;
  fx_t [1:0] mu3;
  delay_line #(.W(8*FX_W), .D(PL)) i_d3 (.clk,
    .din ({det2, lw2, conic2, mu2, {FX_W{1'b0}}}),
    .dout({det3, lw3, conic3, mu3, pad3}));

  // ---- stage 4: ceil and screen test ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; visible <= 1'b0; conic <= '0; radius <= '0;
    end else begin
      fx_t r, view;
      logic on_screen;
      out_valid <= v3;
      // ceil to a whole pixel
      r = (root_r + (FX_ONE - 1)) & ~(FX_ONE - 1);
      view = fx_t'(VIEW_PX) <<< FX_F;
      on_screen = (mu3[0] + r > 0) && (mu3[0] - r < view) &&
                  (mu3[1] + r > 0) && (mu3[1] - r < view);
      visible <= (det3 > 0) && (lw3 > 0) && (r > 0) && on_screen;
      conic   <= conic3;
      radius  <= r;
    end
  end
  logic unused;
  assign unused = ^{v1b, pad1, pad3};
endmodule
