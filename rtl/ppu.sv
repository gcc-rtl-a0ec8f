// ppu: Position Projection Unit.
//
// Takes a camera-space mean (x, y, z) and produces the pixel position of the
// Gaussian centre, u = fx * x / z + cx and v = fy * y / z + cy, where (cx, cy) is the
// principal point already shifted to the current sub-view. The perspective divide
// runs on a pool of four iterative divide units issued round-robin, so one Gaussian
// enters per cycle; the multiply-add that follows corresponds to the NDC and screen
// steps. The reciprocal 1/z is also output for the Jacobian in the RU.
// Timing: out_valid LAT = 6 cycles after in_valid, one result per cycle. focal and
// center are frame constants: they are applied at the output stage and must not
// change while results are in flight.
// The paper gives the structure (MVM, four interleaved 4-cycle dividers, NDC and
// screen multiply-adds); folding NDC and screen mapping into one pinhole step and
// sharing 1/z with the RU are this design's choices.
module ppu
  import gcc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  fx_t [2:0] cam,
  input  fx_t [1:0] focal,
  input  fx_t [1:0] center,
  output logic      out_valid,
  output fx_t [1:0] mu2d,
  output fx_t       inv_z
);
  localparam int LAT = 6;
  logic      d_valid;
  fx_t       d_res;
  fx_t [1:0] d_xy;

  divsqrt_pool #(.TAGW(2*FX_W)) i_div (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_sqrt  (1'b0),
    .a        (FX_ONE),
    .b        (cam[2]),
    .tag_in   ({cam[1], cam[0]}),
    .out_valid(d_valid),
    .res      (d_res),
    .tag_out  (d_xy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; mu2d <= '0; inv_z <= '0;
    end else begin
      out_valid <= d_valid;
      if (d_valid) begin
        inv_z   <= d_res;
        mu2d[0] <= fx_fma(focal[0], fx_mul(d_xy[0], d_res), center[0]);
        mu2d[1] <= fx_fma(focal[1], fx_mul(d_xy[1], d_res), center[1]);
      end
    end
  end
endmodule
