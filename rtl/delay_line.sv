// delay_line: a W-bit shift register of D stages (D = 0 passes straight through).
// Used to carry side data next to the fixed-latency arithmetic pipelines.
module delay_line #(
  parameter int W = 1,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  if (D == 0) begin : g_wire
    assign dout = din;
  end else begin : g_reg
    logic [W-1:0] sr [D];
    always_ff @(posedge clk) begin
      sr[0] <= din;
      for (int i = 1; i < D; i++) sr[i] <= sr[i-1];
    end
    assign dout = sr[D-1];
  end
endmodule
