// pingpong_buffer: a double-buffered on-chip SRAM (two banks of DEPTH x W bits).
//
// The producer writes into bank `wsel` while the consumer reads the other bank;
// `swap` exchanges the roles. Reads return data one cycle after rd_en. Used for the
// Shared Buffer (projected Gaussians of the current group) and the SH Buffer (SH
// coefficients of the Gaussian being coloured). Double buffering follows the paper's
// "2 x" buffer configurations; the depths and widths are set by the instantiating
// module.
module pingpong_buffer #(
  parameter int W = 32,
  parameter int DEPTH = 256,
  parameter int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  output logic          wsel,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [2][DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wsel <= 1'b0;
    else if (swap) wsel <= !wsel;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wsel][wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[!wsel][rd_addr];
  end
endmodule
