// exp_lut: fixed-point piecewise-linear exponential for alpha = min(0.99, e^x).
//
// The input range [-5.54, 0) (alpha from 1/255 to 1) is cut into SEGS = 16 equal
// segments; on segment s, e^x ~ a_s * x + b_s. Each line is the chord of e^x over its
// segment, shifted down by half its largest deviation so the error is split evenly
// above and below (relative error under 1%). The 16 (a, b) pairs are computed at
// elaboration from e^x. Below -5.54 the output is 0 (discarded); the output is capped
// at 0.99, which also covers x >= 0. Combinational; output is Q0.16.
// The paper gives the range, the 16 segments, the clamp and fixed-point arithmetic;
// segment placement and the error-balancing offset are this design's choices.
module exp_lut
  import gcc_pkg::*;
#(
  parameter int SEGS = 16
) (
  input  fx_t  x,
  output u16_t alpha
);
  localparam real XMIN_R = -5.54;
  localparam real W_R = 5.54 / SEGS;
  localparam fx_t XMIN  = fx_c(XMIN_R);
  localparam fx_t INV_W = fx_c(1.0 / W_R);

  function automatic fx_t coef_a(input int s);
    real x0, x1;
    x0 = XMIN_R + s * W_R; x1 = x0 + W_R;
    return fx_c(($exp(x1) - $exp(x0)) / W_R);
  endfunction
  function automatic fx_t coef_b(input int s);
    real x0, x1, a, b, xm, dev;
    x0 = XMIN_R + s * W_R; x1 = x0 + W_R;
    a  = ($exp(x1) - $exp(x0)) / W_R;
    b  = $exp(x0) - a * x0;
    xm = $ln(a);                       // point of largest chord deviation
    dev = (a * xm + b) - $exp(xm);
    return fx_c(b - dev / 2.0);
  endfunction

  fx_t lut_a [SEGS];
  fx_t lut_b [SEGS];
  for (genvar s = 0; s < SEGS; s++) begin : g_lut
    assign lut_a[s] = coef_a(s);
    assign lut_b[s] = coef_b(s);
  end

  always_comb begin
    fx_t t, y;
    int  seg;
    t = fx_mul(x - XMIN, INV_W);
    seg = int'(t >>> FX_F);
    if (seg > SEGS - 1) seg = SEGS - 1;
    if (seg < 0) seg = 0;
    y = fx_fma(lut_a[seg], x, lut_b[seg]);
    if (x < XMIN)            alpha = '0;
    else if (x >= 0)         alpha = ALPHA_CAP;
    else begin
      alpha = fx_to_u16(y);
      if (alpha > ALPHA_CAP) alpha = ALPHA_CAP;
    end
  end
endmodule
