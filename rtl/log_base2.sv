// log_base2: base-2 logarithm of an 8-bit value, returned as 32*log2(din) in
// 3.5 fixed point (piecewise-linear approximation).
//
// As in the published architecture the integer part and the fraction are
// found separately. A priority encoder (pri_en8to4) gives n, the position of
// the leading one; "invert + 1" turns n into the shift-left count 8-n (mod 8);
// a barrel shifter (barrel_shft) shifts din left by that count, which pushes
// the leading one out and leaves the bits below it, left aligned, as the
// fraction: log2(din) ~ n + (din - 2^n)/2^n. log_out = {n, fraction[7:3]},
// which is the "scaled by 32" log of the published algorithm and fills
// 0..255. din = 0 gives 0.
//
// Timing: two register stages, latency 2, one value per cycle:
// stage 1 registers din and the encoder output, stage 2 shifts and packs.
// log_valid is data_ready delayed by 2. No reset, as in the published signal
// diagram: log_valid is defined two clocks after data_ready is.
module log_base2 (
  input  logic       clk,
  input  logic [7:0] din,
  input  logic       data_ready,
  output logic [7:0] log_out,
  output logic       log_valid
);
  logic [3:0] pos, pos_q;
  logic [7:0] din_q;
  logic [2:0] shamt;
  logic [7:0] shifted;
  logic       rdy_q;

  pri_en8to4 u_pri (.din(din), .pos(pos));

  always_ff @(posedge clk) begin
    pos_q <= pos;
    din_q <= din;
    rdy_q <= data_ready;
  end

  assign shamt = ~pos_q[2:0] + 3'd1;   // invert + 1 = 8 - n

  barrel_shft u_bsh (.din(din_q), .shamt(shamt), .dout(shifted));

  always_ff @(posedge clk) begin
    log_out   <= pos_q[3] ? 8'd0 : {pos_q[2:0], shifted[7:3]};
    log_valid <= rdy_q;
  end
endmodule
