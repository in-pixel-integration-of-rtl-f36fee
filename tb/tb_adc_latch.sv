// tb_adc_latch -- random data with the enable toggling: q must follow d while
// en = 1 and hold the last value while en = 0.
module tb_adc_latch;
  logic       en;
  logic [2:0] d, q, held;
  int checks = 0, failures = 0;

  adc_latch #(.W(3)) dut (.en(en), .d(d), .q(q));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1; d = 3'b000; #1;
    held = 3'b000;
    for (int t = 0; t < 400; t++) begin
      en = ($urandom_range(1) == 1);
      d  = 3'($urandom);
      #1;
      if (en) held = d;
      checks++;
      if (q !== held) begin
        failures++;
        $display("FAIL t=%0d en=%b d=%b q=%b expected %b", t, en, d, q, held);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
