// gain_offset: gain/offset correction, Eqn. (6) of the published algorithm:
// pix_out = d_max/(G_Lmax - G_Lmin) * (G_L - G_Lmin), mapped to 0..255.
//
// The offset is removed by a subtractor; the difference is clamped at zero
// (the minimum in use comes from the previous frame, so a pixel may lie below
// it) and halved so that it fits the 8-bit multiplier input. The multiplier
// is the five-stage mult8u8u; the gain input already holds
// d_max/((G_Lmax-G_Lmin)/2) in a fixed-point format with 128 = 1.0 (see
// gl_range), so the product is divided by 128 and clamped to 255.
//
// Timing: 7 cycles, one pixel per cycle, no stall: subtract (gain sampled with
// it) | multiplier (5) | scale and clamp. pix_valid is gl_valid delayed by 7.
// The subtractor + multiplier structure follows the published text; the
// clamp, the halving and the gain format are this design's choices.
module gain_offset
  import gie_pkg::*;
(
  input  logic  clk,
  input  logic  reset_n,
  input  gl_t   gl,
  input  logic  gl_valid,
  input  gl_t   gl_min,
  input  gain_t gain,
  output pix_t  pix_out,
  output logic  pix_valid
);
  localparam int unsigned LATENCY = 7;

  logic [7:0]  diff_q;
  gain_t       gain_q;
  logic [15:0] prod;
  logic [LATENCY-1:0] vld;
  logic [15:0] scaled;

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      diff_q <= '0;
      gain_q <= '0;
    end else begin
      diff_q <= (gl > gl_min) ? 8'((gl - gl_min) >> 1) : 8'd0;
      gain_q <= gain;
    end
  end

  mult8u8u u_mult (.clk(clk), .n1(diff_q), .n2(gain_q), .result(prod));

  assign scaled = prod >> GAIN_FRAC;

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      pix_out <= '0;
      vld     <= '0;
    end else begin
      pix_out <= (scaled > 16'(D_MAX)) ? pix_t'(D_MAX) : pix_t'(scaled);
      vld     <= {vld[LATENCY-2:0], gl_valid};
    end
  end
  assign pix_valid = vld[LATENCY-1];
endmodule
