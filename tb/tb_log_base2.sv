// tb_log_base2: all 256 inputs, back to back and then with gaps, checked
// against an integer 32*log2 reference, with log_valid exactly 2 clocks after
// data_ready.
module tb_log_base2;
  import gie_ref_pkg::*;
  localparam int LAT = 2;
  logic clk = 0, data_ready = 0, log_valid;
  logic [7:0] din = 0, log_out;
  int checks = 0, failures = 0;
  int exp_q[int];
  int cyc = 0;

  log_base2 dut (.*);

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
    repeat (4) @(negedge clk);
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      if (t > 2) begin
        checks++;
        if (log_valid !== exp_q.exists(cyc)) begin
          failures++;
          if (failures < 10) $display("cyc=%0d log_valid=%0b", cyc, log_valid);
        end else if (log_valid) begin
          checks++;
          if (log_out !== 8'(exp_q[cyc])) begin
            failures++;
            if (failures < 10) $display("cyc=%0d got %0d exp %0d", cyc, log_out, exp_q[cyc]);
          end
        end
      end
      if (t < 256)      begin data_ready = 1; din = 8'(t); end
      else if (t < 900) begin data_ready = ($urandom_range(0, 1) == 1); din = 8'($urandom); end
      else data_ready = 0;
      if (data_ready) exp_q[cyc + LAT] = log_ref(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
