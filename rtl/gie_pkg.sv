// gie_pkg: constants shared by the Gaussian colour image enhancement pipeline.
//
// Holds the 5x5 Gaussian kernel (integer weights whose sum is 273, the
// classic sigma ~ 1 kernel), the pixel and log-domain widths, the fixed-point
// format of the gain (128 = 1.0) and the full-scale output value d_max = 255.
// The kernel weights and d_max are the published algorithm's numbers; the
// widths of the log-domain value and the gain format are this design's choice.
package gie_pkg;

  localparam int unsigned PIX_W  = 8;    // pixel width of every colour channel
  localparam int unsigned COEF_W = 16;   // width of a kernel coefficient / scaled window pixel
  localparam int unsigned WIN    = 5;    // window is WIN x WIN
  localparam int unsigned GL_W   = 9;    // log-domain pixel after scaling by K = 1.5 (max 382)
  localparam int unsigned GAIN_W = 8;    // gain, unsigned, GAIN_ONE = 1.0
  localparam int unsigned GAIN_FRAC = 7; // fraction bits of the gain
  localparam int unsigned GAIN_ONE  = 128;
  localparam int unsigned D_MAX     = 255; // full-scale output value

  typedef logic [PIX_W-1:0]  pix_t;
  typedef logic [COEF_W-1:0] coef_t;
  typedef logic [GL_W-1:0]   gl_t;
  typedef logic [GAIN_W-1:0] gain_t;

  typedef pix_t  pix_win_t  [WIN][WIN];
  typedef coef_t coef_win_t [WIN][WIN];

  // 5x5 Gaussian kernel, to be divided by KERNEL_SUM.
  localparam coef_t GAUSS_5X5 [WIN][WIN] = '{
    '{16'd1, 16'd4,  16'd7,  16'd4,  16'd1},
    '{16'd4, 16'd16, 16'd26, 16'd16, 16'd4},
    '{16'd7, 16'd26, 16'd41, 16'd26, 16'd7},
    '{16'd4, 16'd16, 16'd26, 16'd16, 16'd4},
    '{16'd1, 16'd4,  16'd7,  16'd4,  16'd1}
  };
  localparam int unsigned KERNEL_SUM = 273;

endpackage
