// tb_gaussian_ie: end-to-end test of the whole RGB enhancement system at its
// default size (256x256 frames, no parameter override).
//
// Four frames per channel (dark, bright with a saturated square, full range,
// dark; each channel gets a different pattern) plus the 2*W+2 pixels that
// flush the last frame are streamed in. Frame 0 is sent without gaps so the
// latency can be checked against the nominal 2*W+20 clocks; the later frames
// have random din_valid gaps. Every RGB output is compared with the reference
// model, and each must appear exactly 18 clocks after the input pixel that
// completed its window. The test fails if any of the design's special cases
// (input stall, zero-padded window, log input saturation, gain saturation,
// gain change at a frame boundary, pixel below the previous minimum, output
// clamp) never happened.
module tb_gaussian_ie;
  import gie_pkg::*;
  import gie_ref_pkg::*;
  localparam int W = 256, H = 256;
  localparam int FILL = 2 * W + 2;
  localparam int LAT_TAIL = 18;
  localparam int LAT_FULL = FILL + LAT_TAIL;   // 532 with no gaps
  localparam int NFRAMES = 4;

  logic clk = 0, reset_n = 0, din_valid = 0, pixel_valid;
  pix_t rin = 0, gin = 0, bin = 0, ro, go, bo;
  int checks = 0, failures = 0;
  int cyc = 0;
  int acc_cyc[$];
  int n_seen = 0, n_stall = 0, n_lat_nominal = 0;
  ChannelModel m [3];

  gaussian_ie dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NFRAMES * W * H * 3 / 2) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (reset_n && pixel_valid) begin
    pix_t got [3];
    got = '{ro, go, bo};
    for (int ch = 0; ch < 3; ch++) begin
      checks++;
      if (n_seen >= m[ch].dout.size() || got[ch] !== 8'(m[ch].dout[n_seen])) begin
        failures++;
        if (failures < 10) $display("pixel %0d ch %0d got %0d exp %0d", n_seen, ch, got[ch],
                                    (n_seen < m[ch].dout.size()) ? m[ch].dout[n_seen] : -1);
      end
    end
    checks++;
    if (cyc != acc_cyc[n_seen + FILL] + LAT_TAIL) begin
      failures++;
      if (failures < 10) $display("pixel %0d at cyc %0d, expected %0d", n_seen, cyc,
                                  acc_cyc[n_seen + FILL] + LAT_TAIL);
    end
    if (cyc == acc_cyc[n_seen] + LAT_FULL) n_lat_nominal++;
    n_seen++;
  end

  initial begin
    automatic int n_in = NFRAMES * W * H + FILL;
    for (int ch = 0; ch < 3; ch++) begin
      m[ch] = new(W, H);
      for (int i = 0; i < n_in; i++)
        m[ch].din.push_back(pattern(i / (W * H), i % W, (i / W) % H, ch));
      m[ch].run();
    end
    $display("reference model ready: %0d outputs per channel", m[0].dout.size());
    repeat (3) @(negedge clk);
    reset_n = 1;
    for (int i = 0; i < n_in; ) begin
      @(negedge clk);
      din_valid = (i < W * H) || ($urandom_range(0, 15) != 0);
      if (din_valid) begin
        rin = 8'(m[0].din[i]); gin = 8'(m[1].din[i]); bin = 8'(m[2].din[i]);
        acc_cyc.push_back(cyc + 1);
        i++;
      end else n_stall++;
    end
    @(negedge clk);
    din_valid = 0;
    repeat (LAT_TAIL + 4) @(negedge clk);
    checks++;
    if (n_seen != m[0].dout.size()) begin
      failures++;
      $display("saw %0d outputs, expected %0d", n_seen, m[0].dout.size());
    end
    for (int ch = 0; ch < 3; ch++)
      $display("ch %0d events: pad=%0d log_sat=%0d gain_sat=%0d gain_upd=%0d diff_clamp=%0d out_clamp=%0d",
               ch, m[ch].n_pad, m[ch].n_log_sat, m[ch].n_gain_sat, m[ch].n_gain_upd,
               m[ch].n_diff_clamp, m[ch].n_out_clamp);
    $display("stall cycles=%0d, outputs at the nominal latency of %0d clocks=%0d",
             n_stall, LAT_FULL, n_lat_nominal);
    checks++;
    if (n_stall == 0 || n_lat_nominal == 0) failures++;
    for (int ch = 0; ch < 3; ch++) begin
      checks++;
      if (m[ch].n_pad == 0 || m[ch].n_log_sat == 0 || m[ch].n_gain_sat == 0 ||
          m[ch].n_gain_upd == 0 || m[ch].n_diff_clamp == 0 || m[ch].n_out_clamp == 0) begin
        failures++;
        $display("channel %0d: a mechanism was never exercised", ch);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
