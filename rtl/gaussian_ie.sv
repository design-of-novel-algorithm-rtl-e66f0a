// gaussian_ie: Gaussian-based colour image enhancement system, top level.
//
// An RGB pixel stream in raster order (rin/gin/bin, one pixel per clock while
// din_valid is high) is enhanced channel by channel: each of three identical
// channel_proc pipelines (red, green, blue) smooths its component with a 5x5
// Gaussian kernel, takes a base-2 logarithm to compress the dynamic range,
// and stretches the result to 0..255 with a gain and offset measured on the
// previous frame. The three channels run in lockstep, so ro/go/bo belong to
// the same pixel and pixel_valid is common to them.
//
// Interface: the published top-level signal list (clk, reset_n asynchronous
// active low, rin/gin/bin, ro/go/bo, pixel_valid) plus din_valid, which the
// published simulation uses to start processing. Timing: one enhanced pixel
// per clock; the output for input pixel c appears 2*IMG_WIDTH + 20 clocks
// after it was taken (532 at IMG_WIDTH = 256; the published figure is 535).
// Frames are IMG_WIDTH*IMG_HEIGHT pixels counted from reset. The last
// 2*IMG_WIDTH+2 pixels of a frame leave when as many further pixels (the
// next frame, or blanking pixels with din_valid high) have been taken.
module gaussian_ie
  import gie_pkg::*;
#(
  parameter int unsigned IMG_WIDTH  = 256,
  parameter int unsigned IMG_HEIGHT = 256
) (
  input  logic clk,
  input  logic reset_n,
  input  pix_t rin,
  input  pix_t gin,
  input  pix_t bin,
  input  logic din_valid,
  output pix_t ro,
  output pix_t go,
  output pix_t bo,
  output logic pixel_valid
);
  logic val_r, val_g, val_b;

  channel_proc #(.IMG_WIDTH(IMG_WIDTH), .IMG_HEIGHT(IMG_HEIGHT)) u1_red (
    .clk(clk), .reset_n(reset_n), .din(rin), .din_valid(din_valid),
    .dout(ro), .data_val(val_r));

  channel_proc #(.IMG_WIDTH(IMG_WIDTH), .IMG_HEIGHT(IMG_HEIGHT)) u2_green (
    .clk(clk), .reset_n(reset_n), .din(gin), .din_valid(din_valid),
    .dout(go), .data_val(val_g));

  channel_proc #(.IMG_WIDTH(IMG_WIDTH), .IMG_HEIGHT(IMG_HEIGHT)) u3_blue (
    .clk(clk), .reset_n(reset_n), .din(bin), .din_valid(din_valid),
    .dout(bo), .data_val(val_b));

  assign pixel_valid = val_r;

  // the three channels share one control path and must stay in lockstep
  a_lockstep: assert property (@(posedge clk) disable iff (!reset_n)
                               (val_r == val_g) && (val_r == val_b));
endmodule
