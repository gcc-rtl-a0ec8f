// divsqrt_pool: four iterative divide / square-root units issued round-robin.
//
// Each divsqrt_iter needs four cycles per operation; issuing operation i to unit
// i mod 4 lets the pool accept one operation every cycle with no stall, which is
// how the paper keeps the Position Projection Unit at one Gaussian per cycle.
// Results leave in issue order, LAT = ITER_CYCLES + 1 cycles after in_valid, with a
// TAGW-bit tag carried alongside.
module divsqrt_pool
  import gcc_pkg::*;
#(
  parameter int UNITS = 4,
  parameter int ITER_CYCLES = 4,
  parameter int TAGW = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic            in_sqrt,
  input  fx_t             a,
  input  fx_t             b,
  input  logic [TAGW-1:0] tag_in,
  output logic            out_valid,
  output fx_t             res,
  output logic [TAGW-1:0] tag_out
);
  localparam int LAT = ITER_CYCLES + 1;
  logic [$clog2(UNITS)-1:0] rr;
  logic [UNITS-1:0] u_done;
  fx_t              u_res [UNITS];
  logic [TAGW-1:0]  u_tag [UNITS];

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    divsqrt_iter #(.ITER_CYCLES(ITER_CYCLES), .TAGW(TAGW)) i_unit (
      .clk, .rst_n,
      .start   (in_valid && rr == u),
      .is_sqrt (in_sqrt),
      .a, .b,
      .tag_in,
      .done    (u_done[u]),
      .res     (u_res[u]),
      .tag_out (u_tag[u])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (in_valid) rr <= (int'(rr) == UNITS - 1) ? '0 : rr + 1'b1;
  end

  always_comb begin
    out_valid = 1'b0;
    res       = '0;
    tag_out   = '0;
    for (int u = 0; u < UNITS; u++)
      if (u_done[u]) begin
        out_valid = 1'b1;
        res       = u_res[u];
        tag_out   = u_tag[u];
      end
  end

  // Round-robin issue only works if the units never run slower than the issue rate.
  initial assert (UNITS >= ITER_CYCLES) else $error("divsqrt_pool: UNITS < ITER_CYCLES");
endmodule
