// tb_barrel_shft: exhaustive check of the 8-bit left barrel shifter.
module tb_barrel_shft;
  logic [7:0] din, dout;
  logic [2:0] shamt;
  int checks = 0, failures = 0;

  barrel_shft dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++)
      for (int s = 0; s < 8; s++) begin
        din = 8'(v); shamt = 3'(s);
        #1;
        checks++;
        if (dout !== 8'((v * (1 << s)) % 256)) begin
          failures++;
          if (failures < 10) $display("din=%0d s=%0d got %0d", v, s, dout);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
