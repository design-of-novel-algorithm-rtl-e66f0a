// tb_row_fifo: checks that row_fifo returns each accepted value exactly DEPTH
// accepted values later, and zero before DEPTH values were written, with
// random gaps in the enable.
module tb_row_fifo;
  localparam int DEPTH = 7;
  logic clk = 0, reset_n = 0, en = 0;
  logic [7:0] din = 0, dout;
  int checks = 0, failures = 0;
  int hist[$];

  row_fifo #(.DEPTH(DEPTH), .DW(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    reset_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 3) != 0);
      din = 8'($urandom);
      #1;
      if (en) begin
        begin
          automatic int exp_v = (hist.size() >= DEPTH) ? hist[hist.size() - DEPTH] : 0;
          checks++;
          if (dout !== 8'(exp_v)) begin
            failures++;
            if (failures < 10) $display("mismatch t=%0d got %0h exp %0h", t, dout, exp_v);
          end
        end
        hist.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
