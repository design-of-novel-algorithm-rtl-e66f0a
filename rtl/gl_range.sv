// gl_range: per-frame range statistics of the log-domain image for the
// gain/offset correction.
//
// Eqn. (6) of the published algorithm needs the minimum and maximum of the
// log-transformed image. A one-pass streaming pipeline cannot know them
// before the frame has passed, so this unit measures them over each frame of
// FRAME_PIXELS valid pixels and, on the frame's last pixel, latches them; one
// clock later it loads gl_min = G_Lmin and
//   gain = ceil(d_max * 128 / ((G_Lmax - G_Lmin) / 2)), saturated to 255,
// which the next frame then uses (128 = 1.0; the halving matches gain_offset).
// ceil() makes the frame's brightest pixel map to d_max. After reset
// gl_min = 0 and gain = 128. frame_done pulses in the cycle in which the new
// values appear. The frame is counted from reset; there is no frame-start
// signal. The division is a single-cycle divide used once per frame.
// This whole unit is this design's own realisation of Eqn. (6).
module gl_range
  import gie_pkg::*;
#(
  parameter int unsigned FRAME_PIXELS = 65536
) (
  input  logic  clk,
  input  logic  reset_n,
  input  gl_t   gl,
  input  logic  gl_valid,
  output gl_t   gl_min,
  output gain_t gain,
  output logic  frame_done
);
  localparam int unsigned CW  = $clog2(FRAME_PIXELS + 1);
  localparam int unsigned NUM = D_MAX * GAIN_ONE;   // 32640

  logic [CW-1:0] count;
  gl_t  run_min, run_max;   // running statistics of the current frame
  gl_t  nxt_min, nxt_max;
  gl_t  fr_min, fr_max;     // statistics of the last complete frame
  logic fr_load;
  logic [GL_W-2:0]  half_range;
  logic [15:0]      quot;

  always_comb begin
    nxt_min = (count == '0 || gl < run_min) ? gl : run_min;
    nxt_max = (count == '0 || gl > run_max) ? gl : run_max;
  end

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      count   <= '0;
      run_min <= '0;
      run_max <= '0;
      fr_min  <= '0;
      fr_max  <= '0;
      fr_load <= 1'b0;
    end else begin
      fr_load <= 1'b0;
      if (gl_valid) begin
        run_min <= nxt_min;
        run_max <= nxt_max;
        if (count == CW'(FRAME_PIXELS - 1)) begin
          count   <= '0;
          fr_min  <= nxt_min;
          fr_max  <= nxt_max;
          fr_load <= 1'b1;
        end else begin
          count <= count + 1'b1;
        end
      end
    end
  end

  assign half_range = (GL_W-1)'((fr_max - fr_min) >> 1);
  assign quot = (half_range == '0) ? 16'hFFFF
              : 16'((NUM + 32'(half_range) - 1) / 32'(half_range));

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      gl_min     <= '0;
      gain       <= gain_t'(GAIN_ONE);
      frame_done <= 1'b0;
    end else begin
      frame_done <= fr_load;
      if (fr_load) begin
        gl_min <= fr_min;
        gain   <= (quot > 16'(2**GAIN_W - 1)) ? '1 : gain_t'(quot);
      end
    end
  end
endmodule
