// gie_ref_pkg: reference model of the enhancement algorithm for the testbenches.
//
// Written from the algorithm's equations, independently of the RTL structure:
// the window is taken from a plain array of the input stream, the division
// and logarithm are computed with integer arithmetic, and the frame
// statistics are found by scanning whole frames. ChannelModel turns one
// colour channel's input stream into the expected output stream and counts
// how often each special case of the algorithm occurred.
package gie_ref_pkg;

  // round(sum / 273) of the Gaussian-weighted 5x5 window, saturated at 255
  function automatic int conv_ref(int sum, int ksum);
    int q = (sum + ksum / 2) / ksum;
    return (q > 255) ? 255 : q;
  endfunction

  // 32*log2(v): integer part = index of leading one, 5-bit linear fraction
  function automatic int log_ref(int v);
    int n = 0;
    if (v <= 0) return 0;
    while ((1 << (n + 1)) <= v) n++;
    return n * 32 + ((v - (1 << n)) * 32) / (1 << n);
  endfunction

  // gain for a frame whose log-domain range is [mn, mx], 128 = 1.0
  function automatic int gain_ref(int mn, int mx);
    int hr = (mx - mn) / 2;
    int q;
    if (hr == 0) return 255;
    q = (255 * 128 + hr - 1) / hr;
    return (q > 255) ? 255 : q;
  endfunction

  // gain/offset correction
  function automatic int go_ref(int gl, int mn, int gain);
    int d = (gl > mn) ? (gl - mn) / 2 : 0;
    int p = (d * gain) / 128;
    return (p > 255) ? 255 : p;
  endfunction

  // Test image: frame f, column x, line y, colour channel ch. Frames cycle
  // through a dark low-contrast image, a bright image with a saturated
  // 6x6 square, and a full-range image with a white and a black square, so
  // that every special case of the algorithm occurs.
  function automatic int pattern(int f, int x, int y, int ch);
    case (f % 4)
      1: return (x >= 4 && x < 10 && y >= 1 && y < 7) ? 255
                : 30 + (x * 7 + y * 3 + ch * 11) % 200;
      2: begin
        if (x >= 4 && x < 10 && y >= 1 && y < 7)  return 255;
        if (x >= 10 && x < 16 && y >= 1 && y < 7) return 0;
        return (x * 13 + y * 29 + ch * 50) % 256;
      end
      default: return (x * 3 + y * 5 + ch * 7) % 9;
    endcase
  endfunction

  localparam int KERNEL [5][5] = '{
    '{1, 4, 7, 4, 1}, '{4, 16, 26, 16, 4}, '{7, 26, 41, 26, 7},
    '{4, 16, 26, 16, 4}, '{1, 4, 7, 4, 1}};

  class ChannelModel;
    int width, height;
    int din[$];       // accepted input pixels, in order
    int gl[$];        // log-domain value per centred pixel
    int dout[$];      // expected outputs
    // how often the special cases happened
    int n_pad, n_log_sat, n_gain_sat, n_gain_upd, n_diff_clamp, n_out_clamp;

    function new(int w, int h);
      width = w; height = h;
    endfunction

    // compute expected outputs for every pixel that has been centred
    function void run();
      int fp = width * height;
      int fill = 2 * width + 2;
      int n_out;
      int mn, mx, gain, prev_gain;
      n_out = din.size() - fill;
      gl.delete(); dout.delete();
      n_pad = 0; n_log_sat = 0; n_gain_sat = 0; n_gain_upd = 0;
      n_diff_clamp = 0; n_out_clamp = 0;
      for (int j = 0; j < n_out; j++) begin
        int k = j + fill;
        int sum = 0;
        int g, l;
        bit padded = 0;
        for (int r = 0; r < 5; r++)
          for (int c = 0; c < 5; c++) begin
            int idx = k - (4 - r) * width - c;
            if (idx < 0) padded = 1;
            else sum += KERNEL[r][c] * din[idx];
          end
        if (padded) n_pad++;
        g = conv_ref(sum, 273);
        if (g == 255) n_log_sat++;
        l = log_ref((g == 255) ? 255 : g + 1);
        gl.push_back(l + l / 2);
      end
      mn = 0; gain = 128; prev_gain = 128;
      for (int j = 0; j < n_out; j++) begin
        int d, p;
        if (j % fp == 0 && j >= fp) begin
          mn = gl[j - fp]; mx = gl[j - fp];
          for (int i = j - fp; i < j; i++) begin
            if (gl[i] < mn) mn = gl[i];
            if (gl[i] > mx) mx = gl[i];
          end
          gain = gain_ref(mn, mx);
          if ((mx - mn) / 2 < 128) n_gain_sat++;
          if (gain != prev_gain) n_gain_upd++;
          prev_gain = gain;
        end
        if (gl[j] < mn) n_diff_clamp++;
        d = (gl[j] > mn) ? (gl[j] - mn) / 2 : 0;
        p = (d * gain) / 128;
        if (p > 255) n_out_clamp++;
        dout.push_back(go_ref(gl[j], mn, gain));
      end
    endfunction
  endclass

endpackage
