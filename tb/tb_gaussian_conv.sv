// tb_gaussian_conv: feeds random and corner-case 5x5 windows with the Gaussian
// kernel and checks conv_out = round(sum/273) and conv_valid exactly 7 clocks
// after each window.
module tb_gaussian_conv;
  import gie_pkg::*;
  import gie_ref_pkg::*;
  localparam int LAT = 7;
  logic clk = 0, reset_n = 0, window_valid = 0;
  coef_win_t w, g;
  pix_t conv_out;
  logic conv_valid;
  int checks = 0, failures = 0;
  int exp_q[int];   // expected output per cycle
  int cyc = 0;

  gaussian_conv dut (.*);

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
    g = GAUSS_5X5;
    for (int r = 0; r < 5; r++) for (int c = 0; c < 5; c++) w[r][c] = '0;
    repeat (3) @(negedge clk);
    reset_n = 1;
    for (int t = 0; t < 1200; t++) begin
      @(negedge clk);
      // outputs of the edge that just passed
      checks++;
      if (conv_valid !== exp_q.exists(cyc)) begin
        failures++;
        if (failures < 10) $display("cyc=%0d conv_valid=%0b", cyc, conv_valid);
      end else if (conv_valid) begin
        checks++;
        if (conv_out !== 8'(exp_q[cyc])) begin
          failures++;
          if (failures < 10) $display("cyc=%0d got %0d exp %0d", cyc, conv_out, exp_q[cyc]);
        end
      end
      if (t < 1100) begin
        automatic int sum = 0;
        automatic int mode = $urandom_range(0, 9);
        window_valid = ($urandom_range(0, 3) != 0);
        for (int r = 0; r < 5; r++)
          for (int c = 0; c < 5; c++) begin
            int v;
            case (mode)
              0: v = 255;
              1: v = 0;
              2: v = (r == 2 && c == 2) ? 255 : 0;
              default: v = $urandom_range(0, 255);
            endcase
            w[r][c] = 16'(v);
            sum += KERNEL[r][c] * v;
          end
        if (window_valid) exp_q[cyc + LAT] = conv_ref(sum, 273);
      end else window_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
