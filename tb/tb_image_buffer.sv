// tb_image_buffer: checks the on-chip colour / transmittance buffer of one sub-view.
// After `clear` the buffer must stay busy for one cycle per block (256) and then read
// colour 0 and transmittance 0xFFFF everywhere; random block writes must then read
// back, one cycle after the read request, while unwritten blocks keep the cleared
// values.
module tb_image_buffer;
  import gcc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 clear, busy, rd_en, wr_en;
  logic [BLKW-1:0]      rd_addr, wr_addr;
  u16_t [2:0][NPIX-1:0] rd_c, wr_c;
  u16_t [NPIX-1:0]      rd_t, wr_t;
  u16_t [2:0][NPIX-1:0] mc [NBLK];
  u16_t [NPIX-1:0]      mt [NBLK];
  int checks = 0, failures = 0;

  image_buffer dut (.clk, .rst_n, .clear, .busy, .rd_en, .rd_addr, .rd_c, .rd_t, .wr_en,
    .wr_addr, .wr_c, .wr_t);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(input int blk);
    @(negedge clk);
    rd_en = 1; rd_addr = BLKW'(blk);
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (rd_c != mc[blk] || rd_t != mt[blk]) begin
      failures++;
      if (failures < 10) $display("block %0d read back wrong", blk);
    end
  endtask

  initial begin
    int busy_cycles;
    clear = 0; rd_en = 0; wr_en = 0; rd_addr = '0; wr_addr = '0; wr_c = '0; wr_t = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      mc[b] = '0;
      mt[b] = '1;
    end
    // fill with junk first so that the clear has something to erase
    for (int b = 0; b < NBLK; b++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = BLKW'(b);
      for (int p = 0; p < NPIX; p++) begin
        wr_t[p] = u16_t'($urandom);
        for (int c = 0; c < 3; c++) wr_c[c][p] = u16_t'($urandom);
      end
    end
    @(negedge clk) wr_en = 0;
    clear = 1;
    @(negedge clk) clear = 0;
    busy_cycles = 0;
    while (busy) begin
      busy_cycles++;
      @(negedge clk);
    end
    checks++;
    if (busy_cycles != NBLK) begin
      failures++;
      $display("clear took %0d cycles, want %0d", busy_cycles, NBLK);
    end
    for (int b = 0; b < NBLK; b++) read_check(b);
    for (int n = 0; n < 200; n++) begin
      int b;
      b = $urandom_range(0, NBLK - 1);
      @(negedge clk);
      wr_en = 1; wr_addr = BLKW'(b);
      for (int p = 0; p < NPIX; p++) begin
        wr_t[p] = u16_t'($urandom);
        for (int c = 0; c < 3; c++) wr_c[c][p] = u16_t'($urandom);
      end
      mc[b] = wr_c; mt[b] = wr_t;
      @(negedge clk) wr_en = 0;
      read_check($urandom_range(0, NBLK - 1));
    end
    for (int b = 0; b < NBLK; b++) read_check(b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
