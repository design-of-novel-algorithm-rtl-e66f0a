// channel_proc: complete enhancement pipeline for one colour component
// (red, green or blue; the top level instantiates three).
//
// Chain, in the order of the published per-channel architecture:
//   serpentine_memory  5x5 window of the raster-scan input
//   gaussian_conv      Gaussian smoothing, G = round(sum W*G / 273)
//   +1, log_base2      32*log2(1+G), the +1 saturating at 255 because the
//                      logarithm unit has an 8-bit input
//   scale by K = 1.5   G_L = L + L/2 (9 bits)
//   gl_range           G_Lmin and gain of the previous frame
//   gain_offset        I' = gain * (G_L - G_Lmin), clamped to 0..255
// K = 1.5 is the published constant; it cancels in the gain/offset step and
// only changes rounding there.
//
// Timing: one pixel per clock, no stall. With din_valid high every cycle the
// output for input pixel c leaves 2*IMG_WIDTH + 2 + 18 clocks after it was
// taken (532 for IMG_WIDTH = 256): 2*IMG_WIDTH+2 pixels to centre it in the
// window, then convolution 7, log 2, K 1, alignment 1, gain/offset 7. The
// alignment register makes every frame (IMG_WIDTH*IMG_HEIGHT pixels counted
// from reset) use exactly the previous frame's range statistics.
// Port names din, dout, data_val follow the published RTL view.
module channel_proc
  import gie_pkg::*;
#(
  parameter int unsigned IMG_WIDTH  = 256,
  parameter int unsigned IMG_HEIGHT = 256
) (
  input  logic clk,
  input  logic reset_n,
  input  pix_t din,
  input  logic din_valid,
  output pix_t dout,
  output logic data_val
);
  pix_win_t  win;
  coef_win_t win16;
  logic      window_valid;
  pix_t      pixel_out_unused;
  pix_t      conv_out;
  logic      conv_valid;
  pix_t      log_in;
  pix_t      log_out;
  logic      log_valid;
  gl_t       gl, gl_d;
  logic      gl_valid, gl_d_valid;
  gl_t       gl_min;
  gain_t     gain;
  logic      frame_done_unused;

  serpentine_memory #(.IMG_WIDTH(IMG_WIDTH)) u_win (
    .clk         (clk),
    .reset_n     (reset_n),
    .pixel_in    (din),
    .pixel_en    (din_valid),
    .w           (win),
    .window_valid(window_valid),
    .pixel_out   (pixel_out_unused)
  );

  // window pixels scaled to 16 bits to match the coefficients
  always_comb begin
    for (int r = 0; r < WIN; r++)
      for (int c = 0; c < WIN; c++)
        win16[r][c] = coef_t'(win[r][c]);
  end

  gaussian_conv u_conv (
    .clk         (clk),
    .reset_n     (reset_n),
    .w           (win16),
    .g           (GAUSS_5X5),
    .window_valid(window_valid),
    .conv_out    (conv_out),
    .conv_valid  (conv_valid)
  );

  assign log_in = (conv_out == pix_t'(D_MAX)) ? conv_out : conv_out + 1'b1;

  log_base2 u_log (
    .clk       (clk),
    .din       (log_in),
    .data_ready(conv_valid),
    .log_out   (log_out),
    .log_valid (log_valid)
  );

  // scale by K = 1.5, then one alignment register in front of gain/offset
  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      gl         <= '0;
      gl_valid   <= 1'b0;
      gl_d       <= '0;
      gl_d_valid <= 1'b0;
    end else begin
      gl         <= gl_t'(log_out) + gl_t'(log_out[7:1]);
      gl_valid   <= log_valid;
      gl_d       <= gl;
      gl_d_valid <= gl_valid;
    end
  end

  gl_range #(.FRAME_PIXELS(IMG_WIDTH * IMG_HEIGHT)) u_range (
    .clk       (clk),
    .reset_n   (reset_n),
    .gl        (gl),
    .gl_valid  (gl_valid),
    .gl_min    (gl_min),
    .gain      (gain),
    .frame_done(frame_done_unused)
  );

  gain_offset u_gain (
    .clk      (clk),
    .reset_n  (reset_n),
    .gl       (gl_d),
    .gl_valid (gl_d_valid),
    .gl_min   (gl_min),
    .gain     (gain),
    .pix_out  (dout),
    .pix_valid(data_val)
  );
endmodule
