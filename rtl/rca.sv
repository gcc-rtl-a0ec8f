// rca: Reconfigurable Comparator Array used for Stage I depth grouping.
//
// Each incoming view depth d is compared with NPIV ascending pivots in parallel; the
// popcount of the "d >= pivot" results is the depth-group ID (group 0 is nearest).
// Depths below the Z pivot CULL_Z (0.2) are culled. Per-group adders count how many
// Gaussians each group has received, which also gives each Gaussian its slot inside
// its group (the controller turns grp * GROUP_N + slot into a DRAM address). When a
// group reaches GROUP_N = 256 the sticky overflow flag rises and the extra Gaussian
// is marked dropped.
// Timing: one depth per cycle, result one cycle later. `clear` zeroes all counters.
// The paper gives the comparator + popcount path, the 0.2 pivot and N = 256. The
// paper's recursive subdivision of overfull groups (its "accurate" mode) is not built
// here: overflow is only reported. The pivot table is loaded from outside.
module rca
  import gcc_pkg::*;
#(
  parameter int NPIV = 15,
  parameter int GROUP_N = 256,
  parameter int CNTW = $clog2(GROUP_N + 1),
  parameter int GW = $clog2(NPIV + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  fx_t [NPIV-1:0]       pivots,
  input  logic                 in_valid,
  input  fx_t                  depth,
  output logic                 out_valid,
  output logic                 culled,
  output logic                 dropped,
  output logic [GW-1:0]        grp,
  output logic [CNTW-1:0]      slot,
  output logic [NPIV:0][CNTW-1:0] counts,
  output logic                 overflow
);
  localparam fx_t CULL_Z = fx_c(0.2);

  logic [GW-1:0] pop;
  always_comb begin
    pop = '0;
    for (int k = 0; k < NPIV; k++) pop = pop + GW'(depth >= pivots[k]);
  end
  logic is_culled;
  assign is_culled = depth < CULL_Z;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; culled <= 1'b0; dropped <= 1'b0; grp <= '0; slot <= '0;
      counts <= '0; overflow <= 1'b0;
    end else if (clear) begin
      out_valid <= 1'b0; counts <= '0; overflow <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        culled  <= is_culled;
        grp     <= pop;
        slot    <= counts[pop];
        dropped <= 1'b0;
        if (!is_culled) begin
          if (int'(counts[pop]) < GROUP_N) counts[pop] <= counts[pop] + 1'b1;
          else begin
            overflow <= 1'b1;
            dropped  <= 1'b1;
          end
        end
      end
    end
  end
endmodule
