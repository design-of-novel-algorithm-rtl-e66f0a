// mult8u8u: five-stage pipelined 8x8 unsigned multiplier of the gain/offset
// correction.
//
// The structure follows the published schematic: eight partial products
// P1..P8, P(i+1) = n1 AND n2[i] (unshifted), are registered (Clk 1); the
// first adder stage adds each pair as P(2k-1) + (P(2k) << 1) (Clk 2); the
// second adds those pairs with a 2-bit shift (Clk 3); the third adds the two
// halves with a 4-bit shift (Clk 4) and the 16-bit product is registered once
// more (Clk 5). result = n1*n2 appears 5 clocks after the operands, one
// product per clock, no reset and no valid (the caller delays its valid).
module mult8u8u (
  input  logic        clk,
  input  logic [7:0]  n1,
  input  logic [7:0]  n2,
  output logic [15:0] result
);
  logic [7:0]  pp  [8];   // Clk 1
  logic [9:0]  st1 [4];   // Clk 2: LS 1b
  logic [11:0] st2 [2];   // Clk 3: LS 2b
  logic [15:0] st3;       // Clk 4: LS 4b

  always_ff @(posedge clk) begin
    for (int i = 0; i < 8; i++) pp[i] <= n1 & {8{n2[i]}};
    for (int k = 0; k < 4; k++) st1[k] <= 10'(pp[2*k]) + (10'(pp[2*k+1]) << 1);
    for (int k = 0; k < 2; k++) st2[k] <= 12'(st1[2*k]) + (12'(st1[2*k+1]) << 2);
    st3    <= 16'(st2[0]) + (16'(st2[1]) << 4);
    result <= st3;
  end
endmodule
