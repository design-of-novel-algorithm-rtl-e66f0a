// tb_channel_proc: end-to-end test of one colour channel on 16x8 frames.
// Four frames (dark, bright with a saturated square, full range, dark) and a
// flush are fed with random gaps in din_valid; every output is compared with
// the reference model, and each output must leave exactly 18 clocks after the
// input pixel that completed its window (2*W+2 pixels after it).
module tb_channel_proc;
  import gie_pkg::*;
  import gie_ref_pkg::*;
  localparam int W = 16, H = 8;
  localparam int FILL = 2 * W + 2;
  localparam int LAT_TAIL = 18;
  logic clk = 0, reset_n = 0, din_valid = 0, data_val;
  pix_t din = 0, dout;
  int checks = 0, failures = 0;
  int cyc = 0;
  int acc_cyc[$];
  int n_seen = 0, n_stall = 0;
  ChannelModel m;

  channel_proc #(.IMG_WIDTH(W), .IMG_HEIGHT(H)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (reset_n) begin
    if (data_val) begin
      checks++;
      if (n_seen >= m.dout.size() || dout !== 8'(m.dout[n_seen])) begin
        failures++;
        if (failures < 10) $display("out %0d got %0d exp %0d", n_seen, dout,
                                    (n_seen < m.dout.size()) ? m.dout[n_seen] : -1);
      end
      checks++;
      if (cyc != acc_cyc[n_seen + FILL] + LAT_TAIL) begin
        failures++;
        if (failures < 10) $display("out %0d at cyc %0d, expected %0d", n_seen, cyc,
                                    acc_cyc[n_seen + FILL] + LAT_TAIL);
      end
      n_seen++;
    end
  end

  initial begin
    automatic int n_in = 4 * W * H + FILL;
    m = new(W, H);
    for (int i = 0; i < n_in; i++)
      m.din.push_back(pattern(i / (W * H), i % W, (i / W) % H, 0));
    m.run();
    repeat (3) @(negedge clk);
    reset_n = 1;
    for (int i = 0; i < n_in; ) begin
      @(negedge clk);
      din_valid = ($urandom_range(0, 5) != 0);
      if (din_valid) begin
        din = 8'(m.din[i]);
        acc_cyc.push_back(cyc + 1);
        i++;
      end else n_stall++;
    end
    @(negedge clk);
    din_valid = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (n_seen != m.dout.size()) begin
      failures++;
      $display("saw %0d outputs, expected %0d", n_seen, m.dout.size());
    end
    $display("events: stall=%0d pad=%0d log_sat=%0d gain_sat=%0d gain_upd=%0d diff_clamp=%0d out_clamp=%0d",
             n_stall, m.n_pad, m.n_log_sat, m.n_gain_sat, m.n_gain_upd, m.n_diff_clamp, m.n_out_clamp);
    checks++;
    if (n_stall == 0 || m.n_pad == 0 || m.n_log_sat == 0 || m.n_gain_sat == 0 ||
        m.n_gain_upd == 0 || m.n_diff_clamp == 0 || m.n_out_clamp == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
