// image_buffer: the on-chip image buffer of one 128 x 128 sub-view.
//
// Four banks, R, G, B and T, each 256 words of one 8 x 8 block (64 x 16 bits), i.e.
// 4 x 32 KB. One block is read and one written per cycle; reads return the stored
// value one cycle later (read before write on the same address). `clear` starts a
// 256-cycle sweep that sets every colour to 0 and every transmittance to 1.0
// (0xFFFF); `busy` is high during the sweep, when the ports are ignored.
// Bank organisation follows the paper's 1 x 4 x 32 KB; the register-array model of
// the SRAM macros and the clear sweep are this design's.
module image_buffer
  import gcc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  output logic                  busy,
  input  logic                  rd_en,
  input  logic [BLKW-1:0]       rd_addr,
  output u16_t [2:0][NPIX-1:0]  rd_c,
  output u16_t [NPIX-1:0]       rd_t,
  input  logic                  wr_en,
  input  logic [BLKW-1:0]       wr_addr,
  input  u16_t [2:0][NPIX-1:0]  wr_c,
  input  u16_t [NPIX-1:0]       wr_t
);
  u16_t [NPIX-1:0] bank_r [NBLK];
  u16_t [NPIX-1:0] bank_g [NBLK];
  u16_t [NPIX-1:0] bank_b [NBLK];
  u16_t [NPIX-1:0] bank_t [NBLK];
  logic [BLKW:0]   clr_ptr;

  assign busy = clr_ptr != 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) clr_ptr <= '0;
    else if (clear && !busy) clr_ptr <= (BLKW+1)'(NBLK);
    else if (busy) clr_ptr <= clr_ptr - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      bank_r[clr_ptr[BLKW-1:0] - 1'b1] <= '0;
      bank_g[clr_ptr[BLKW-1:0] - 1'b1] <= '0;
      bank_b[clr_ptr[BLKW-1:0] - 1'b1] <= '0;
      bank_t[clr_ptr[BLKW-1:0] - 1'b1] <= '1;
    end else if (wr_en) begin
      bank_r[wr_addr] <= wr_c[0];
      bank_g[wr_addr] <= wr_c[1];
      bank_b[wr_addr] <= wr_c[2];
      bank_t[wr_addr] <= wr_t;
    end
    if (rd_en) begin
      rd_c[0] <= bank_r[rd_addr];
      rd_c[1] <= bank_g[rd_addr];
      rd_c[2] <= bank_b[rd_addr];
      rd_t    <= bank_t[rd_addr];
    end
  end
endmodule
