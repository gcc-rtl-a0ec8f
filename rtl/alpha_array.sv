// alpha_array: the Alpha Unit's 8 x 8 PE array.
//
// For one 8 x 8 pixel block of the sub-view and one projected Gaussian, every PE
// computes, for its pixel p = (8*bx + i, 8*by + j) and d = p - mu',
//   power = ln w - 0.5 * (a dx^2 + c dy^2) - b dx dy        (Eq. 9 in log space)
//   alpha = min(0.99, exp(power))                           (exp_lut)
// and flags pass[p] when alpha >= 1/255. any_pass tells the identifier whether the
// block lies inside the Gaussian's footprint. The Gaussian's colour rides along to
// the Blending Unit. Block index = by * 16 + bx; pixel e = j * 8 + i inside a block.
// Timing: one block per cycle through one register stage with valid/ready.
// Equation and array size follow the paper; the register stage and the handshake
// are this design's choices.
module alpha_array
  import gcc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [BLKW-1:0]   in_blk,
  input  proj_t             gp,
  input  u16_t [2:0]        in_rgb,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [BLKW-1:0]   out_blk,
  output u16_t [NPIX-1:0]   alpha,
  output logic [NPIX-1:0]   pass,
  output logic              any_pass,
  output u16_t [2:0]        out_rgb
);
  fx_t  [NPIX-1:0] power;
  u16_t [NPIX-1:0] a_c;
  logic [BLKW-1:0] blk;
  assign blk = in_blk;

  for (genvar e = 0; e < NPIX; e++) begin : g_pe
    always_comb begin
      fx_t px, py, dx, dy, q;
      px = fx_t'(int'(blk[3:0]) * BN + (e % BN)) <<< FX_F;
      py = fx_t'(int'(blk[7:4]) * BN + (e / BN)) <<< FX_F;
      dx = px - gp.mu2d[0];
      dy = py - gp.mu2d[1];
      q  = fx_fma(gp.conic[0], fx_mul(dx, dx), fx_mul(gp.conic[2], fx_mul(dy, dy)));
      power[e] = gp.ln_w - (q >>> 1) - fx_mul(gp.conic[1], fx_mul(dx, dy));
    end
    exp_lut i_exp (.x(power[e]), .alpha(a_c[e]));
  end

  assign in_ready = out_ready || !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_blk <= '0; alpha <= '0; pass <= '0; any_pass <= 1'b0;
      out_rgb <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        logic [NPIX-1:0] ps;
        for (int e = 0; e < NPIX; e++) ps[e] = a_c[e] >= ALPHA_MIN;
        out_blk  <= in_blk;
        alpha    <= a_c;
        pass     <= ps;
        any_pass <= |ps;
        out_rgb  <= in_rgb;
      end
    end
  end
endmodule
