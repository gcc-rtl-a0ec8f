// sort_unit: Sort Unit with its double-buffered Sorted Buffer.
//
// Orders the visible Gaussians of one depth group front to back (ascending view
// depth). Entries (depth key, 8-bit slot index) are loaded one per cycle. On `start`
// the 16-element bitonic network sorts runs of 16 entries, one run per cycle, in
// place; then merge passes (run length 16, 32, ... up to MAXN) stream two sorted runs
// into one at one entry per cycle, ping-ponging between the two banks of the sorted
// buffer. `done` pulses when the result is ready; rd_addr = rank reads the slot index
// of that rank (combinational read). For MAXN = 256 a full group takes 16 cycles of
// runs plus 4 x 256 cycles of merging.
// The paper states the 16-element bitonic network and a 2 x 1 KB sorted buffer (here
// 2 x 256 entries); how runs of 16 become a sorted group of 256 is not described, and
// the run-and-merge scheme is this design's choice. Padding entries use the largest key.
module sort_unit
  import gcc_pkg::*;
#(
  parameter int MAXN = 256,
  parameter int IW = $clog2(MAXN),
  parameter int CW = $clog2(MAXN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,       // empty the load side
  input  logic          load_valid,
  input  fx_t           load_key,
  input  logic [IW-1:0] load_idx,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [CW-1:0] count,
  input  logic [IW-1:0] rd_addr,
  output logic [IW-1:0] rd_idx,
  output fx_t           rd_key
);
  localparam int NRUN = (MAXN + 15) / 16;
  localparam int AW = $clog2(NRUN * 16);

  // two banks of the sorted buffer
  fx_t           key_m [2][NRUN*16];
  logic [IW-1:0] idx_m [2][NRUN*16];
  logic          cur;                 // bank holding the latest data

  typedef enum logic [1:0] {S_IDLE, S_RUNS, S_MERGE} st_t;
  st_t st;
  logic [CW-1:0] n;
  logic [AW:0]   run, L, base, i, j, k;

  // bitonic network on one run
  fx_t  [15:0]         nk_in, nk_out;
  logic [15:0][IW-1:0] np_in, np_out;
  always_comb begin
    for (int e = 0; e < 16; e++) begin
      int a;
      a = int'(run) * 16 + e;
      if (a < int'(n)) begin
        nk_in[e] = key_m[cur][a[AW-1:0]];
        np_in[e] = idx_m[cur][a[AW-1:0]];
      end else begin
        nk_in[e] = FX_MAX;
        np_in[e] = '0;
      end
    end
  end
  bitonic16 #(.KW(FX_W), .PW(IW)) i_net (.key_in(nk_in), .pay_in(np_in),
                                         .key_out(nk_out), .pay_out(np_out));

  // merge step
  logic [AW:0] end_a, end_b, nbase;
  logic        take_a;
  always_comb begin
    end_a  = ((base + L) < (AW+1)'(n)) ? base + L : (AW+1)'(n);
    end_b  = ((base + 2*L) < (AW+1)'(n)) ? base + 2*L : (AW+1)'(n);
    take_a = (i < end_a) && ((j >= end_b) ||
             (key_m[cur][i[AW-1:0]] <= key_m[cur][j[AW-1:0]]));
    nbase  = base + 2*L;
  end

  assign busy  = (st != S_IDLE);
  assign count = n;
  assign rd_idx = idx_m[cur][rd_addr];
  assign rd_key = key_m[cur][rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; n <= '0; cur <= 1'b0; done <= 1'b0;
      run <= '0; L <= '0; base <= '0; i <= '0; j <= '0; k <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: begin
          if (clear) n <= '0;
          else if (load_valid && int'(n) < MAXN) begin
            key_m[cur][n[AW-1:0]] <= load_key;
            idx_m[cur][n[AW-1:0]] <= load_idx;
            n <= n + 1'b1;
          end
          if (start) begin
            run <= '0;
            if (n == 0) done <= 1'b1;
            else st <= S_RUNS;
          end
        end
        S_RUNS: begin
          for (int e = 0; e < 16; e++) begin
            key_m[cur][run[AW-4:0] * 16 + e] <= nk_out[e];
            idx_m[cur][run[AW-4:0] * 16 + e] <= np_out[e];
          end
          if ((run + 1) * 16 >= (AW+1)'(n)) begin
            if (int'(n) <= 16) begin
              st <= S_IDLE; done <= 1'b1;
            end else begin
              st <= S_MERGE; L <= 16; base <= '0; i <= '0; j <= 16; k <= '0;
            end
          end
          run <= run + 1'b1;
        end
        S_MERGE: begin
          key_m[!cur][k[AW-1:0]] <= take_a ? key_m[cur][i[AW-1:0]] : key_m[cur][j[AW-1:0]];
          idx_m[!cur][k[AW-1:0]] <= take_a ? idx_m[cur][i[AW-1:0]] : idx_m[cur][j[AW-1:0]];
          if (take_a) i <= i + 1'b1; else j <= j + 1'b1;
          k <= k + 1'b1;
          if (k + 1 == end_b) begin
            if (nbase >= (AW+1)'(n)) begin
              // pass finished
              cur <= !cur;
              if (2*L >= (AW+1)'(n)) begin
                st <= S_IDLE; done <= 1'b1;
              end else begin
                L <= 2*L; base <= '0; i <= '0; k <= '0;
                j <= (2*L < (AW+1)'(n)) ? 2*L : (AW+1)'(n);
              end
            end else begin
              base <= nbase; i <= nbase; k <= nbase;
              j <= (nbase + L < (AW+1)'(n)) ? nbase + L : (AW+1)'(n);
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
