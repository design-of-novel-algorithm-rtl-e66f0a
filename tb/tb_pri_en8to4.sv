// tb_pri_en8to4: exhaustive check of the priority encoder against a
// loop-computed leading-one position.
module tb_pri_en8to4;
  logic [7:0] din;
  logic [3:0] pos;
  int checks = 0, failures = 0;

  pri_en8to4 dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      automatic int e = 8;
      for (int i = 0; i < 8; i++) if ((v >> i) & 1) e = i;
      din = 8'(v);
      #1;
      checks++;
      if (pos !== 4'(e)) begin
        failures++;
        $display("din=%0d got %0d exp %0d", v, pos, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
