// tb_thermo_encoder -- all eight 3-bit input codes against a bit count.
module tb_thermo_encoder;
  logic [2:0] therm;
  logic [1:0] bin;
  int checks = 0, failures = 0;

  thermo_encoder dut (.therm(therm), .bin(bin));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++) begin
      int n;
      therm = 3'(c);
      n = (c & 1) + ((c >> 1) & 1) + ((c >> 2) & 1);
      #1;
      checks++;
      if (int'(bin) != n) begin
        failures++;
        $display("FAIL therm=%b bin=%0d expected %0d", therm, bin, n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
