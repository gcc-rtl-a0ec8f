// shared_mvm: the shared 3 x 3 matrix-vector multiplier of the Projection Unit.
//
// res = mat * vec + bias. Each of the three rows is a chain of three multiply-add
// cells fed with the bias, so a row is three FMAs as in the nine-cell array of the
// paper's projection logic. The same unit computes the view-space depth in Stage I
// (row 2 of the view transform) and the camera-space mean in Stage II.
// Timing: one result per cycle, valid one cycle after the operands (this design's
// choice; the paper gives no latency). Arithmetic is the saturating fixed point of
// gcc_pkg instead of the paper's floating point.
module shared_mvm
  import gcc_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  fx_t [2:0][2:0] mat,
  input  fx_t [2:0]      vec,
  input  fx_t [2:0]      bias,
  output logic           out_valid,
  output fx_t [2:0]      res
);
  fx_t [2:0] acc;
  always_comb begin
    for (int r = 0; r < 3; r++) begin
      acc[r] = bias[r];
      for (int c = 0; c < 3; c++) acc[r] = fx_fma(mat[r][c], vec[c], acc[r]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      res       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) res <= acc;
    end
  end
endmodule
