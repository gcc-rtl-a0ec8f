// tb_divsqrt_pool: checks the four-way interleaved divide / square-root pool.
// One operation is issued in every cycle (the pool must never need a gap), mixing
// divisions, square roots and a few divisions by zero. Each result is checked
// exactly against integer arithmetic worked out here (quotient truncated toward
// zero and saturated; square root as the largest r with r*r <= a << FX_F), its tag
// must come back with it, and it must arrive exactly LAT = 5 cycles after issue.
module tb_divsqrt_pool;
  import gcc_pkg::*;
  localparam int LAT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid, in_sqrt, out_valid;
  fx_t        a, b, res;
  logic [7:0] tag_in, tag_out;
  int checks = 0, failures = 0, cyc = 0;
  logic       q_sqrt [$];
  fx_t        q_a [$], q_b [$];
  logic [7:0] q_tag [$];
  int         q_cyc [$];

  divsqrt_pool #(.TAGW(8)) dut (.clk, .rst_n, .in_valid, .in_sqrt, .a, .b, .tag_in,
    .out_valid, .res, .tag_out);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic ok_div(input fx_t x, input fx_t y, input fx_t r);
    logic signed [127:0] n, d, q;
    if (y == 0) return (x >= 0) ? (r == FX_MAX) : (r == FX_MIN);
    n = 128'(x) <<< FX_F;
    d = 128'(y);
    q = n / d;                          // truncates toward zero
    if (q > 128'(FX_MAX)) q = 128'(FX_MAX);
    if (q < 128'(FX_MIN)) q = 128'(FX_MIN);
    return r == fx_t'(q);
  endfunction

  function automatic logic ok_sqrt(input fx_t x, input fx_t r);
    logic [127:0] n, rr, r1;
    if (x <= 0) return r == 0;
    n  = 128'(x) << FX_F;
    rr = 128'(r) * 128'(r);
    r1 = (128'(r) + 1) * (128'(r) + 1);
    return r >= 0 && rr <= n && r1 > n;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    logic s;
    fx_t  xa, xb;
    checks++;
    if (q_a.size() == 0) begin
      failures++;
      $display("unexpected result");
    end else begin
      s = q_sqrt.pop_front(); xa = q_a.pop_front(); xb = q_b.pop_front();
      if (cyc - q_cyc.pop_front() != LAT) begin
        failures++;
        $display("latency wrong");
      end
      if (tag_out != q_tag.pop_front()) begin
        failures++;
        $display("tag mismatch");
      end
      if (s ? !ok_sqrt(xa, res) : !ok_div(xa, xb, res)) begin
        failures++;
        if (failures < 10) $display("%s a=%0d b=%0d got %0d", s ? "sqrt" : "div", xa, xb, res);
      end
    end
  end

  initial begin
    in_valid = 0; in_sqrt = 0; a = '0; b = '0; tag_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_sqrt  = $urandom_range(0, 1);
      a = fx_t'($signed({$urandom, $urandom})) >>> $urandom_range(8, 40);
      b = fx_t'($signed({$urandom, $urandom})) >>> $urandom_range(8, 40);
      if ($urandom_range(0, 40) == 0) b = '0;
      if (in_sqrt && $urandom_range(0, 3) != 0 && a < 0) a = -a;
      tag_in = 8'(n);
      q_sqrt.push_back(in_sqrt); q_a.push_back(a); q_b.push_back(b);
      q_tag.push_back(tag_in); q_cyc.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (q_a.size() != 0) begin
      checks   += q_a.size();          // every missing result counts as a failed check
      failures += q_a.size() + 1;
      $display("%0d results missing", q_a.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
