// tb_serpentine_memory: drives a random pixel stream with random gaps into a
// 12-pixel-wide serpentine memory and checks, after every accepted pixel, all
// 25 window taps against the stream history (zeros before the first pixel),
// window_valid against the 2*W+2 fill rule and pixel_out against tap W15.
module tb_serpentine_memory;
  import gie_pkg::*;
  localparam int W = 12;
  logic clk = 0, reset_n = 0, pixel_en = 0;
  pix_t pixel_in = 0, pixel_out;
  pix_win_t w;
  logic window_valid;
  int checks = 0, failures = 0;
  int hist[$];

  serpentine_memory #(.IMG_WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic bit accepted = 0;
    repeat (3) @(negedge clk);
    reset_n = 1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      // check the state left by the previous edge
      if (accepted) begin
        automatic int k = hist.size() - 1;
        for (int r = 0; r < 5; r++)
          for (int c = 0; c < 5; c++) begin
            automatic int idx = k - (4 - r) * W - c;
            automatic int exp_v = (idx < 0) ? 0 : hist[idx];
            checks++;
            if (w[r][c] !== 8'(exp_v)) begin
              failures++;
              if (failures < 10) $display("t=%0d W%0d%0d got %0d exp %0d", t, r+1, c+1, w[r][c], exp_v);
            end
          end
        checks++;
        if (pixel_out !== w[0][4]) failures++;
      end
      checks++;
      if (window_valid !== (accepted && hist.size() > 2 * W + 2)) begin
        failures++;
        if (failures < 10) $display("t=%0d window_valid=%0b n=%0d", t, window_valid, hist.size());
      end
      pixel_en = ($urandom_range(0, 4) != 0);
      pixel_in = 8'($urandom);
      accepted = pixel_en;
      if (pixel_en) hist.push_back(pixel_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
