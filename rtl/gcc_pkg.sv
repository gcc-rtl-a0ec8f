// gcc_pkg: shared types, constants and fixed-point helpers of the GCC 3D Gaussian
// Splatting renderer.
//
// Every arithmetic unit works on signed fixed point fx_t (48 bits, 20 fraction bits,
// range about +/-1.3e8). The paper's units use floating-point multiply-add; this
// RTL replaces them with saturating fixed point, wide enough that the determinant of
// a projected covariance of a Gaussian up to ~100 pixels across does not overflow.
// Colours, transmittance and alpha are unsigned Q0.16 (u16_t), which is what the
// 4 x 32 KB image buffer of a 128 x 128 sub-view holds per pixel and channel.
// Geometry constants (8 x 8 pixel blocks, 128 x 128 sub-view, 16 x 16 blocks) follow
// the paper; the number format is this design's choice.
package gcc_pkg;
  localparam int FX_W = 48;
  localparam int FX_F = 20;
  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic [15:0] u16_t;

  localparam fx_t FX_ONE = fx_t'(64'sd1 <<< FX_F);
  localparam fx_t FX_MAX = {1'b0, {(FX_W-1){1'b1}}};
  localparam fx_t FX_MIN = {1'b1, {(FX_W-1){1'b0}}};

  // Image geometry: n x n pixel blocks, one sub-view of VIEW x VIEW pixels.
  localparam int BN   = 8;
  localparam int NPIX = BN * BN;        // 64 pixel engines
  localparam int VIEW = 128;
  localparam int BPR  = VIEW / BN;      // 16 blocks per row
  localparam int NBLK = BPR * BPR;      // 256 blocks
  localparam int BLKW = $clog2(NBLK);

  // Thresholds in Q0.16.
  localparam u16_t ALPHA_MIN = 16'd257;   // 1/255
  localparam u16_t ALPHA_CAP = 16'd64880; // 0.99
  localparam u16_t T_MIN     = 16'd7;     // 0.0001

  // Per-Gaussian parameters as stored off chip (mean, scale, rotation, ln opacity).
  typedef struct packed {
    fx_t [2:0] mu;
    fx_t [2:0] scale;
    fx_t [3:0] quat;    // w, x, y, z
    fx_t       ln_w;
  } gauss3d_t;

  // Camera: world-to-camera rotation W and translation t, focal lengths and
  // principal point in pixels, camera centre in world space.
  typedef struct packed {
    fx_t [2:0][2:0] view_rot;
    fx_t [2:0]      view_t;
    fx_t [1:0]      focal;
    fx_t [1:0]      center;
    fx_t [2:0]      cam_pos;
  } cam_t;

  // A projected Gaussian, ready for the Alpha Unit.
  typedef struct packed {
    fx_t [1:0] mu2d;    // pixel coordinates in the sub-view
    fx_t [2:0] conic;   // inverse 2D covariance: a, b, c
    fx_t       ln_w;
    fx_t       depth;
    fx_t       radius;
    logic      visible;
  } proj_t;

  // SH coefficients: 16 per channel, index [k][channel].
  typedef fx_t [15:0][2:0] sh_t;

  function automatic fx_t fx_sat(input logic signed [2*FX_W-1:0] v);
    if (v > (2*FX_W)'(FX_MAX)) return FX_MAX;
    if (v < (2*FX_W)'(FX_MIN)) return FX_MIN;
    return fx_t'(v);
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] ae, be, p;
    ae = a; be = b;
    p = ae * be;
    return fx_sat(p >>> FX_F);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] ae, be;
    ae = a; be = b;
    return fx_sat(ae + be);
  endfunction

  function automatic fx_t fx_fma(input fx_t a, input fx_t b, input fx_t c);
    return fx_add(fx_mul(a, b), c);
  endfunction

  // Elaboration-time constant from a real number.
  function automatic fx_t fx_c(input real r);
    return fx_t'(longint'(r * (2.0 ** FX_F)));
  endfunction

  // Q0.16 from fx_t, clamped to [0, 0xFFFF].
  function automatic u16_t fx_to_u16(input fx_t v);
    fx_t s;
    if (v <= 0) return '0;
    s = v >>> (FX_F - 16);
    if (s > 48'sd65535) return 16'hFFFF;
    return u16_t'(s);
  endfunction
endpackage
