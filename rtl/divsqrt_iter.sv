// divsqrt_iter: one iterative fused divide / square-root unit.
//
// Division: res = a / b in fx_t, by restoring long division of |a| << FX_F by |b|;
// square root: res = sqrt(a) in fx_t, digit by digit on a << FX_F. Both produce
// FX_W result bits, FX_W / ITER_CYCLES of them per clock, so an operation takes
// ITER_CYCLES = 4 clocks as in the paper. A quotient that does not fit, or a division
// by zero, saturates to the largest value of the sign; a negative radicand gives 0
// (this design's choice). The digit algorithm is not given by the paper.
// Timing: `start` loads the operands; the result and `done` appear ITER_CYCLES + 1
// cycles after `start` (cycle of start counted as 0). A new `start` may coincide
// with the last iteration, so the unit accepts an operation every ITER_CYCLES cycles.
module divsqrt_iter
  import gcc_pkg::*;
#(
  parameter int ITER_CYCLES = 4,
  parameter int TAGW = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            is_sqrt,
  input  fx_t             a,
  input  fx_t             b,
  input  logic [TAGW-1:0] tag_in,
  output logic            done,
  output fx_t             res,
  output logic [TAGW-1:0] tag_out
);
  localparam int STEPS = (FX_W + ITER_CYCLES - 1) / ITER_CYCLES;
  localparam int BITS  = STEPS * ITER_CYCLES;
  localparam int WW    = 2 * FX_W + 8;
  typedef logic [WW-1:0] w_t;

  w_t num, den, q;
  logic op_sqrt, neg, ovf;
  logic [$clog2(ITER_CYCLES+1)-1:0] cnt;
  logic [$clog2(BITS+1)-1:0] bit_i;   // next result bit to decide
  logic [TAGW-1:0] tag_q;

  // One clock of work: STEPS result bits.
  w_t num_n, q_n;
  always_comb begin
    w_t trial;
    trial = '0;
    num_n = num;
    q_n   = q;
    for (int s = 0; s < STEPS; s++) begin
      int bi;
      bi = int'(bit_i) - 1 - s;
      if (bi >= 0) begin
        if (!op_sqrt) begin
          trial = den << bi;
          if (trial <= num_n) begin
            num_n = num_n - trial;
            q_n[bi] = 1'b1;
          end
        end else begin
          trial = q_n | (w_t'(1) << bi);
          if (trial * trial <= num) q_n = trial;
        end
      end
    end
  end

  fx_t final_res;
  always_comb begin
    if (ovf)
      final_res = neg ? FX_MIN : FX_MAX;
    else if (q_n > w_t'(FX_MAX))
      final_res = neg ? FX_MIN : FX_MAX;
    else
      final_res = neg ? -fx_t'(q_n) : fx_t'(q_n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; done <= 1'b0; res <= '0; num <= '0; den <= '0; q <= '0;
      op_sqrt <= 1'b0; neg <= 1'b0; ovf <= 1'b0; bit_i <= '0; tag_q <= '0; tag_out <= '0;
    end else begin
      done <= 1'b0;
      if (cnt != 0) begin
        num   <= num_n;
        q     <= q_n;
        bit_i <= bit_i - STEPS[$clog2(BITS+1)-1:0];
        cnt   <= cnt - 1'b1;
        if (cnt == 1) begin
          done    <= 1'b1;
          res     <= final_res;
          tag_out <= tag_q;
        end
      end
      if (start) begin
        w_t ua, ub;
        ua = w_t'(a[FX_W-1] ? -a : a);
        ub = w_t'(b[FX_W-1] ? -b : b);
        cnt     <= ITER_CYCLES[$clog2(ITER_CYCLES+1)-1:0];
        op_sqrt <= is_sqrt;
        tag_q   <= tag_in;
        q       <= '0;
        bit_i   <= BITS[$clog2(BITS+1)-1:0];
        if (is_sqrt) begin
          num <= a[FX_W-1] ? '0 : (ua << FX_F);
          den <= '0;
          neg <= 1'b0;
          ovf <= 1'b0;
        end else begin
          num <= ua << FX_F;
          den <= ub;
          neg <= a[FX_W-1] ^ b[FX_W-1];
          // quotient would need more than FX_W-1 bits, or b == 0
          ovf <= (ub == 0) || ((ua << FX_F) >= (ub << (FX_W - 1)));
        end
      end
    end
  end
endmodule
