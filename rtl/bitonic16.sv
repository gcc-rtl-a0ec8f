// bitonic16: combinational 16-input bitonic sorting network (ascending by key).
//
// Standard bitonic construction: for stage sizes k = 2, 4, 8, 16 and distances
// j = k/2 .. 1, element i is compare-exchanged with i ^ j, ascending when bit k of i
// is clear. 80 compare-exchange cells in 10 layers. Each entry is a key with a
// payload; keys are compared as signed numbers.
module bitonic16 #(
  parameter int KW = 48,
  parameter int PW = 8
) (
  input  logic signed [15:0][KW-1:0] key_in,
  input  logic        [15:0][PW-1:0] pay_in,
  output logic signed [15:0][KW-1:0] key_out,
  output logic        [15:0][PW-1:0] pay_out
);
  always_comb begin
    logic signed [KW-1:0] k [16];
    logic        [PW-1:0] p [16];
    logic signed [KW-1:0] tk;
    logic        [PW-1:0] tp;
    tk = '0; tp = '0;
    key_out = '0; pay_out = '0;
    for (int i = 0; i < 16; i++) begin k[i] = key_in[i]; p[i] = pay_in[i]; end
    for (int ks = 2; ks <= 16; ks = ks * 2)
      for (int j = ks / 2; j > 0; j = j / 2)
        for (int i = 0; i < 16; i++) begin
          int l;
          l = 0;
          l = i ^ j;
          if (l > i) begin
            if (((i & ks) == 0) ? (k[i] > k[l]) : (k[i] < k[l])) begin
              tk = k[i]; k[i] = k[l]; k[l] = tk;
              tp = p[i]; p[i] = p[l]; p[l] = tp;
            end
          end
        end
    for (int i = 0; i < 16; i++) begin key_out[i] = k[i]; pay_out[i] = p[i]; end
  end
endmodule
