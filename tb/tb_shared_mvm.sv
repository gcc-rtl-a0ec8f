// tb_shared_mvm: checks the shared matrix-vector unit, res = mat * vec + bias.
// Random matrices and vectors of moderate size are fed one per cycle, back to back;
// each result is compared with a product worked out in real arithmetic and must
// appear exactly one cycle after its inputs (out_valid in the next cycle).
module tb_shared_mvm;
  import gcc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           in_valid, out_valid;
  fx_t [2:0][2:0] mat;
  fx_t [2:0]      vec, bias, res;
  int checks = 0, failures = 0;
  real wq0 [$], wq1 [$], wq2 [$];
  int  cyc_q [$];
  int  cyc = 0;

  shared_mvm dut (.clk, .rst_n, .in_valid, .mat, .vec, .bias, .out_valid, .res);

  function automatic real fr(input fx_t v); return real'(v) / (2.0 ** FX_F); endfunction
  function automatic fx_t tf(input real r); return fx_t'(longint'(r * (2.0 ** FX_F))); endfunction
  function automatic real rnd(input real span);
    return span * (real'($urandom_range(0, 2000000)) / 1.0e6 - 1.0);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // scoreboard
  always @(posedge clk) if (rst_n && out_valid) begin
    real w [3];
    int  c0;
    checks++;
    if (wq0.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      w[0] = wq0.pop_front(); w[1] = wq1.pop_front(); w[2] = wq2.pop_front();
      c0 = cyc_q.pop_front();
      if (cyc - c0 != 1) begin
        failures++;
        $display("latency %0d, want 1", cyc - c0);
      end
      for (int r = 0; r < 3; r++) begin
        real d;
        d = fr(res[r]) - w[r];
        if (d > 1e-3 || -d > 1e-3) begin
          failures++;
          $display("row %0d: got %f want %f", r, fr(res[r]), w[r]);
        end
      end
    end
  end

  initial begin
    in_valid = 0; mat = '0; vec = '0; bias = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      real m [3][3];
      real v [3], b [3], w [3];
      for (int r = 0; r < 3; r++) begin
        for (int c = 0; c < 3; c++) m[r][c] = rnd(2.0);
        v[r] = rnd(50.0);
        b[r] = rnd(20.0);
      end
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int r = 0; r < 3; r++) begin
        for (int c = 0; c < 3; c++) mat[r][c] = tf(m[r][c]);
        vec[r] = tf(v[r]);
        bias[r] = tf(b[r]);
      end
      if (in_valid) begin
        for (int r = 0; r < 3; r++) begin
          w[r] = fr(bias[r]);
          for (int c = 0; c < 3; c++) w[r] += fr(mat[r][c]) * fr(vec[c]);
        end
        wq0.push_back(w[0]); wq1.push_back(w[1]); wq2.push_back(w[2]);
        cyc_q.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (wq0.size() != 0) begin
      failures++;
      $display("%0d results missing", wq0.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
