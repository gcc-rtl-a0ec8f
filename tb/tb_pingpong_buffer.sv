// tb_pingpong_buffer: checks the double-buffered scratch memory.
// Several rounds: the write side fills bank `wsel` with random words while the
// read side reads back, one cycle later, the words written in the previous round
// (the other bank); then `swap` exchanges the roles. A write in the same cycle as a
// read must not disturb the bank being read.
module tb_pingpong_buffer;
  localparam int W = 40, DEPTH = 32, AW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          swap, wsel, wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [W-1:0]  wr_data, rd_data;
  logic [W-1:0]  model [2][DEPTH];
  int checks = 0, failures = 0;

  pingpong_buffer #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .swap, .wsel, .wr_en, .wr_addr,
    .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic side;
    swap = 0; wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    side = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      @(negedge clk);
      checks++;
      if (wsel != side) begin
        failures++;
        $display("wsel %0d, want %0d", wsel, side);
      end
      for (int i = 0; i < DEPTH; i++) begin
        logic [AW-1:0] ra;
        ra = AW'($urandom_range(0, DEPTH - 1));
        wr_en = 1; wr_addr = AW'(i); wr_data = {$urandom, $urandom};
        rd_en = (round > 0); rd_addr = ra;
        model[side][i] = wr_data;
        @(negedge clk);
        if (round > 0) begin
          checks++;
          if (rd_data != model[!side][ra]) begin
            failures++;
            $display("round %0d addr %0d: got %h want %h", round, ra, rd_data, model[!side][ra]);
          end
        end
      end
      wr_en = 0; rd_en = 0;
      swap = 1;
      @(negedge clk) swap = 0;
      side = !side;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
