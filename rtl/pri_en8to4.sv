// pri_en8to4: 8-to-4 priority encoder, the integer-part unit of the base-2
// logarithm.
//
// pos[2:0] is the index of the most significant set bit of din, i.e.
// floor(log2(din)); pos[3] is set when din is zero (pos[2:0] is then 0).
// Purely combinational. The module name and its role come from the published
// logarithm architecture; the 4-bit output encoding is this design's choice.
module pri_en8to4 (
  input  logic [7:0] din,
  output logic [3:0] pos
);
  always_comb begin
    pos = 4'b1000;
    for (int i = 0; i < 8; i++)
      if (din[i]) pos = {1'b0, 3'(i)};
  end
endmodule
