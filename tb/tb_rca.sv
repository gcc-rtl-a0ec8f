// tb_rca: checks the Range Comparison Array of depth grouping.
// Fifteen sorted random pivots are loaded; random depths are then streamed, one
// per cycle with gaps. For each, the expected group is the number of pivots not
// above the depth, depths below 0.2 must be culled, the slot must be the running
// count of that group, and a group that is full (GROUP_N, reduced here to 8) must
// drop the depth and raise the sticky overflow flag. Results are due exactly one
// cycle after the input; `clear` must empty all counts.
module tb_rca;
  import gcc_pkg::*;
  localparam int NPIV = 15, GROUP_N = 8, CNTW = $clog2(GROUP_N + 1), GW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, out_valid, culled, dropped, overflow;
  fx_t [NPIV-1:0] pivots;
  fx_t depth;
  logic [GW-1:0] grp;
  logic [CNTW-1:0] slot;
  logic [NPIV:0][CNTW-1:0] counts;
  int checks = 0, failures = 0;
  int mcount [NPIV+1];
  int n_cull = 0, n_drop = 0;

  rca #(.NPIV(NPIV), .GROUP_N(GROUP_N)) dut (.clk, .rst_n, .clear, .pivots, .in_valid, .depth,
    .out_valid, .culled, .dropped, .grp, .slot, .counts, .overflow);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction

  initial begin
    logic exp_ovf;
    clear = 0; in_valid = 0; depth = '0;
    for (int k = 0; k < NPIV; k++) pivots[k] = tf(0.5 + 2.0 * k);   // 0.5, 2.5, ... 28.5
    for (int g = 0; g <= NPIV; g++) mcount[g] = 0;
    exp_ovf = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int  eg;
      real d;
      logic ec, ed;
      @(negedge clk);
      d = 31.0 * real'($urandom_range(0, 1000000)) / 1.0e6 - 0.3;
      if (n % 50 == 7) d = 0.2;          // exactly at the cull bound: kept
      if (n % 50 == 9) d = 2.5;          // exactly on a pivot: counted as above it
      depth = tf(d);
      in_valid = 1;
      eg = 0;
      for (int k = 0; k < NPIV; k++) if (depth >= pivots[k]) eg++;
      ec = depth < tf(0.2);
      ed = !ec && mcount[eg] >= GROUP_N;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || culled != ec || (!ec && (int'(grp) != eg || dropped != ed
          || (!ed && int'(slot) != mcount[eg])))) begin
        failures++;
        if (failures < 10)
          $display("depth %f: got v%0d c%0d d%0d g%0d s%0d, want c%0d d%0d g%0d s%0d", d,
            out_valid, culled, dropped, grp, slot, ec, ed, eg, mcount[eg]);
      end
      if (ec) n_cull++;
      if (ed) begin
        n_drop++;
        exp_ovf = 1;
      end
      if (!ec && !ed) mcount[eg]++;
      checks++;
      if (overflow != exp_ovf) begin
        failures++;
        $display("overflow flag %0d, want %0d", overflow, exp_ovf);
      end
      for (int g = 0; g <= NPIV; g++) begin
        checks++;
        if (int'(counts[g]) != mcount[g]) begin
          failures++;
          if (failures < 10) $display("count[%0d] = %0d, want %0d", g, counts[g], mcount[g]);
        end
      end
      if ($urandom_range(0, 1)) @(negedge clk);
      if (n == 200) begin
        clear = 1;
        @(negedge clk) clear = 0;
        for (int g = 0; g <= NPIV; g++) mcount[g] = 0;
        exp_ovf = 0;
      end
    end
    checks++;
    if (n_cull == 0 || n_drop == 0) begin
      failures++;
      $display("cull (%0d) or drop (%0d) never exercised", n_cull, n_drop);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
