// tb_gl_range: frames of 40 log-domain pixels with random gaps, some wide,
// some narrow and one flat; checks the reset values, that new gl_min/gain
// appear with frame_done exactly 2 clocks after a frame's last pixel, and
// that they equal the frame's minimum and ceil(255*128/half range).
module tb_gl_range;
  import gie_pkg::*;
  import gie_ref_pkg::*;
  localparam int FP = 40;
  logic clk = 0, reset_n = 0, gl_valid = 0, frame_done;
  gl_t gl = 0, gl_min;
  gain_t gain;
  int checks = 0, failures = 0;
  int cyc = 0;
  int done_at[int];
  int exp_min = 0, exp_gain = 128;
  int upd_min[int], upd_gain[int];

  gl_range #(.FRAME_PIXELS(FP)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int n = 0, mn = 0, mx = 0, frame = 0;
    repeat (3) @(negedge clk);
    reset_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (frame_done !== done_at.exists(cyc)) begin
        failures++;
        if (failures < 10) $display("cyc=%0d frame_done=%0b", cyc, frame_done);
      end
      if (done_at.exists(cyc)) begin
        exp_min = upd_min[cyc]; exp_gain = upd_gain[cyc];
      end
      checks += 2;
      if (gl_min !== 9'(exp_min)) begin
        failures++;
        if (failures < 10) $display("cyc=%0d gl_min %0d exp %0d", cyc, gl_min, exp_min);
      end
      if (gain !== 8'(exp_gain)) begin
        failures++;
        if (failures < 10) $display("cyc=%0d gain %0d exp %0d", cyc, gain, exp_gain);
      end
      gl_valid = ($urandom_range(0, 3) != 0) && t < 1900;
      case (frame % 4)
        0: gl = 9'($urandom_range(0, 382));
        1: gl = 9'($urandom_range(200, 260));
        2: gl = 9'(123);
        default: gl = 9'($urandom_range(50, 382));
      endcase
      if (gl_valid) begin
        if (n == 0 || gl < mn) mn = gl;
        if (n == 0 || gl > mx) mx = gl;
        n++;
        if (n == FP) begin
          done_at[cyc + 2] = 1;
          upd_min[cyc + 2] = mn;
          upd_gain[cyc + 2] = gain_ref(mn, mx);
          n = 0; frame++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
