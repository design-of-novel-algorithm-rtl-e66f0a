// tb_mult8u8u: one product per clock, corner operands then random ones,
// checked against n1*n2 exactly 5 clocks later.
module tb_mult8u8u;
  localparam int LAT = 5;
  logic clk = 0;
  logic [7:0] n1 = 0, n2 = 0;
  logic [15:0] result;
  int checks = 0, failures = 0;
  int exp_q[int];
  int cyc = 0;

  mult8u8u dut (.*);

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
    int corner[6] = '{0, 1, 127, 128, 254, 255};
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      if (exp_q.exists(cyc)) begin
        checks++;
        if (result !== 16'(exp_q[cyc])) begin
          failures++;
          if (failures < 10) $display("cyc=%0d got %0d exp %0d", cyc, result, exp_q[cyc]);
        end
      end
      if (t < 36) begin n1 = 8'(corner[t / 6]); n2 = 8'(corner[t % 6]); end
      else begin n1 = 8'($urandom); n2 = 8'($urandom); end
      if (t < 990) exp_q[cyc + LAT] = int'(n1) * int'(n2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
