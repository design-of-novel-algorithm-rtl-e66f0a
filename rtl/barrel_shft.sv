// barrel_shft: 8-bit logarithmic left barrel shifter, the normalising unit of
// the base-2 logarithm.
//
// dout = din << shamt, truncated to 8 bits, built from three 2:1 multiplexer
// levels that shift by 1, 2 and 4 positions. Purely combinational. The
// module name and its place in the logarithm unit come from the published
// architecture; the mux-level structure is the usual way to build one.
module barrel_shft (
  input  logic [7:0] din,
  input  logic [2:0] shamt,
  output logic [7:0] dout
);
  logic [7:0] s1, s2;
  assign s1   = shamt[0] ? {din[6:0], 1'b0}  : din;
  assign s2   = shamt[1] ? {s1[5:0],  2'b00} : s1;
  assign dout = shamt[2] ? {s2[3:0],  4'h0}  : s2;
endmodule
