// tb_gain_offset: random log-domain pixels, minima and gains (including
// pixels below the minimum, zero gain and products above 255), checked against
// the gain/offset formula, with pix_valid exactly 7 clocks after gl_valid.
module tb_gain_offset;
  import gie_pkg::*;
  import gie_ref_pkg::*;
  localparam int LAT = 7;
  logic clk = 0, reset_n = 0, gl_valid = 0, pix_valid;
  gl_t gl = 0, gl_min = 0;
  gain_t gain = 0;
  pix_t pix_out;
  int checks = 0, failures = 0;
  int exp_q[int];
  int cyc = 0;

  gain_offset dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    reset_n = 1;
    for (int t = 0; t < 1200; t++) begin
      @(negedge clk);
      checks++;
      if (pix_valid !== exp_q.exists(cyc)) begin
        failures++;
        if (failures < 10) $display("cyc=%0d pix_valid=%0b", cyc, pix_valid);
      end else if (pix_valid) begin
        checks++;
        if (pix_out !== 8'(exp_q[cyc])) begin
          failures++;
          if (failures < 10) $display("cyc=%0d got %0d exp %0d", cyc, pix_out, exp_q[cyc]);
        end
      end
      if (t < 1100) begin
        gl_valid = ($urandom_range(0, 3) != 0);
        gl       = 9'($urandom_range(0, 382));
        if (t % 50 == 0) begin
          gl_min = 9'($urandom_range(0, 300));
          gain   = 8'($urandom);
        end
        if (gl_valid) exp_q[cyc + LAT] = go_ref(gl, gl_min, gain);
      end else gl_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
