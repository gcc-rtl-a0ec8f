// tb_sort_unit: checks the Sort Unit and its sorted buffer.
// Rounds of random size (0 to MAXN, reduced here to 64, with the edge sizes 1, 16,
// 17 and MAXN included) are loaded with random keys, some repeated, and unique slot
// indices. After `done`, reading ranks 0..count-1 must give non-decreasing keys,
// every loaded index exactly once and, for each index, the key it was loaded with.
// The sort must take ceil(n/16) run cycles plus one n-cycle pass per merge level
// (ceil(log2(n/16)) levels), as the unit's description states.
module tb_sort_unit;
  import gcc_pkg::*;
  localparam int MAXN = 64, IW = 6, CW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, load_valid, start, busy, done;
  fx_t load_key, rd_key;
  logic [IW-1:0] load_idx, rd_addr, rd_idx;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;

  sort_unit #(.MAXN(MAXN)) dut (.clk, .rst_n, .clear, .load_valid, .load_key, .load_idx, .start,
    .busy, .done, .count, .rd_addr, .rd_idx, .rd_key);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes [8] = '{1, 16, 17, 64, 0, 33, 5, 48};
    clear = 0; load_valid = 0; start = 0; load_key = '0; load_idx = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      int n, cyc, want_cyc, runs, passes, len;
      fx_t key_of [MAXN];
      bit  seen [MAXN];
      logic [IW-1:0] perm [MAXN];
      n = (round < 8) ? sizes[round] : $urandom_range(0, MAXN);
      for (int e = 0; e < MAXN; e++) perm[e] = IW'(e);
      perm.shuffle();
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      for (int e = 0; e < n; e++) begin
        load_valid = 1;
        load_idx = perm[e];
        load_key = fx_t'($urandom_range(0, 40)) <<< ($urandom_range(0, 1) ? 18 : 10);
        if ($urandom_range(0, 5) == 0) load_key = -load_key;
        key_of[perm[e]] = load_key;
        @(negedge clk);
      end
      load_valid = 0;
      checks++;
      if (int'(count) != n) begin
        failures++;
        $display("count %0d, want %0d", count, n);
      end
      start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      runs = (n + 15) / 16;
      passes = 0;
      for (len = 16; len < n; len *= 2) passes++;
      want_cyc = (n == 0) ? 1 : runs + passes * n + 1;
      checks++;
      if (cyc != want_cyc) begin
        failures++;
        $display("n=%0d: sort took %0d cycles, want %0d", n, cyc, want_cyc);
      end
      for (int e = 0; e < MAXN; e++) seen[e] = 0;
      for (int r = 0; r < n; r++) begin
        fx_t prev;
        rd_addr = IW'(r);
        #1;
        checks++;
        if ((r > 0 && rd_key < prev) || seen[rd_idx] || key_of[rd_idx] != rd_key) begin
          failures++;
          if (failures < 10) $display("n=%0d rank %0d: key %0d idx %0d wrong", n, r, rd_key, rd_idx);
        end
        seen[rd_idx] = 1;
        prev = rd_key;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
