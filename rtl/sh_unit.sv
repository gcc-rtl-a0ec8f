// sh_unit: Spherical Harmonics Unit (NORM followed by the R, G and B SH elements).
//
// The view direction v = mu - cam_pos is normalised by NORM: |v| is taken with the
// square-root mode and 1/|v| with the divide mode of two divide/sqrt pools (the same
// unit design as the PPU). The 16 real SH basis functions of degree <= 3 are then
// evaluated at the unit direction and each SHE (one per colour channel) forms the dot
// product with that channel's 16 coefficients (Eq. 2). As in the 3DGS reference
// renderer, 0.5 is added and the colour is clamped at 0; it leaves as Q0.16.
// The coefficient layout is sh[k][channel], k = 0..15.
// Timing: one Gaussian per cycle, out_valid LAT = 14 cycles after in_valid.
// The paper gives the unit structure (NORM, R/G/B SHE) and Eq. 2; the basis constants,
// the +0.5 offset and the clamp come from the public 3DGS formulation.
module sh_unit
  import gcc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  fx_t [2:0]  mu,
  input  fx_t [2:0]  cam_pos,
  input  sh_t        sh,
  output logic       out_valid,
  output u16_t [2:0] rgb
);
  localparam int PL = 5;
  localparam fx_t C0  = fx_c(0.28209479177387814);
  localparam fx_t C1  = fx_c(0.4886025119029199);
  localparam fx_t C20 = fx_c(1.0925484305920792);
  localparam fx_t C22 = fx_c(0.31539156525252005);
  localparam fx_t C24 = fx_c(0.5462742152960396);
  localparam fx_t C30 = fx_c(-0.5900435899266435);
  localparam fx_t C31 = fx_c(2.890611442640554);
  localparam fx_t C32 = fx_c(-0.4570457994644658);
  localparam fx_t C33 = fx_c(0.3731763325901154);
  localparam fx_t C35 = fx_c(1.445305721320277);
  localparam fx_t HALF = fx_c(0.5);

  // ---- stage 0: direction and squared length ----
  logic v0;
  fx_t [2:0] dir0;
  fx_t len2;
  sh_t sh0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; dir0 <= '0; len2 <= '0; sh0 <= '0;
    end else begin
      fx_t [2:0] d;
      v0 <= in_valid;
      for (int a = 0; a < 3; a++) d[a] = mu[a] - cam_pos[a];
      dir0 <= d;
      len2 <= fx_fma(d[0], d[0], fx_fma(d[1], d[1], fx_mul(d[2], d[2])));
      sh0  <= sh;
    end
  end

  // ---- NORM: |v|, then 1/|v| ----
  logic v1, v2;
  fx_t  len, inv_len;
  divsqrt_pool i_sqrt (.clk, .rst_n, .in_valid(v0), .in_sqrt(1'b1), .a(len2), .b('0),
                       .tag_in(1'b0), .out_valid(v1), .res(len), .tag_out());
  divsqrt_pool i_rcp (.clk, .rst_n, .in_valid(v1), .in_sqrt(1'b0), .a(FX_ONE), .b(len),
                      .tag_in(1'b0), .out_valid(v2), .res(inv_len), .tag_out());
  fx_t [2:0] dir2;
  sh_t sh2;
  delay_line #(.W(3*FX_W + $bits(sh_t)), .D(2*PL)) i_dl (.clk,
    .din({dir0, sh0}), .dout({dir2, sh2}));

  // ---- stage 3: unit direction ----
  logic v3;
  fx_t x, y, z;
  sh_t sh3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3 <= 1'b0; x <= '0; y <= '0; z <= '0; sh3 <= '0;
    end else begin
      v3 <= v2;
      x <= fx_mul(dir2[0], inv_len);
      y <= fx_mul(dir2[1], inv_len);
      z <= fx_mul(dir2[2], inv_len);
      sh3 <= sh2;
    end
  end

  // ---- stage 4: basis functions ----
  logic v4;
  fx_t [15:0] basis;
  sh_t sh4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v4 <= 1'b0; basis <= '0; sh4 <= '0;
    end else begin
      fx_t xx, yy, zz, xy, yz, xz;
      v4 <= v3;
      xx = fx_mul(x, x); yy = fx_mul(y, y); zz = fx_mul(z, z);
      xy = fx_mul(x, y); yz = fx_mul(y, z); xz = fx_mul(x, z);
      basis[0]  <= C0;
      basis[1]  <= -fx_mul(C1, y);
      basis[2]  <= fx_mul(C1, z);
      basis[3]  <= -fx_mul(C1, x);
      basis[4]  <= fx_mul(C20, xy);
      basis[5]  <= -fx_mul(C20, yz);
      basis[6]  <= fx_mul(C22, (zz <<< 1) - xx - yy);
      basis[7]  <= -fx_mul(C20, xz);
      basis[8]  <= fx_mul(C24, xx - yy);
      basis[9]  <= fx_mul(C30, fx_mul(y, 3 * xx - yy));
      basis[10] <= fx_mul(C31, fx_mul(xy, z));
      basis[11] <= fx_mul(C32, fx_mul(y, (zz <<< 2) - xx - yy));
      basis[12] <= fx_mul(C33, fx_mul(z, (zz <<< 1) - 3 * xx - 3 * yy));
      basis[13] <= fx_mul(C32, fx_mul(x, (zz <<< 2) - xx - yy));
      basis[14] <= fx_mul(C35, fx_mul(z, xx - yy));
      basis[15] <= fx_mul(C30, fx_mul(x, xx - 3 * yy));
      sh4 <= sh3;
    end
  end

  // ---- stage 5: R, G, B SHE dot products ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; rgb <= '0;
    end else begin
      out_valid <= v4;
      for (int ch = 0; ch < 3; ch++) begin
        fx_t acc;
        acc = HALF;
        for (int kk = 0; kk < 16; kk++) acc = fx_fma(basis[kk], sh4[kk][ch], acc);
        rgb[ch] <= fx_to_u16(acc);
      end
    end
  end
endmodule
