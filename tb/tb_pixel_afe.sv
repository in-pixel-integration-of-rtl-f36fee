// tb_pixel_afe -- injects charge steps of several sizes with each capacitor
// setting, inside and outside the sampling phase, and checks the comparator
// bits against Q = dV * n * C0 / q_e and V = Q * CvG (clamped at 8000 e-).
module tb_pixel_afe;
  real  pixInTest, vth0, vth1, vth2;
  logic bxclk_ana;
  logic [1:0] config_pix;
  logic [2:0] adc_out;
  int checks = 0, failures = 0;
  int az_rejected = 0, saturated = 0;

  pixel_afe dut (.pixInTest(pixInTest), .vth0(vth0), .vth1(vth1), .vth2(vth2),
                 .bxclk_ana(bxclk_ana), .config_pix(config_pix), .adc_out(adc_out));

  localparam real QE = 1.602176634e-19;

  function automatic logic [2:0] expect_bits(input real dv, input int n);
    real q, v;
    q = dv * n * 1.85e-15 / QE;
    if (q > 8000.0) q = 8000.0;
    v = q * 58.5e-6;
    return {v >= vth2, v >= vth1, v >= vth0};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [2:0] exp, input string what);
    checks++;
    if (adc_out !== exp) begin
      failures++;
      $display("FAIL %s: adc_out=%b expected %b", what, adc_out, exp);
    end
  endtask

  initial begin
    real steps [5] = '{0.02, 0.05, 0.1, 0.2, 0.6};
    vth0 = 0.08; vth1 = 0.16; vth2 = 0.32;     // the paper's [80,160,320] mV set
    pixInTest = 0.6; bxclk_ana = 0; config_pix = 0;
    #10;
    for (int n = 0; n < 4; n++)
      for (int s = 0; s < 5; s++) begin
        config_pix = 2'(n);
        pixInTest = 0.6;
        #10 bxclk_ana = 1;            // sampling phase starts
        #10 chk(3'b000, "before injection");
        pixInTest = 0.6 - steps[s];   // falling step injects charge
        #10 chk(expect_bits(steps[s], n), $sformatf("n=%0d step=%0.2f", n, steps[s]));
        if (expect_bits(steps[s], n) == 3'b111 && steps[s] * n * 1.85e-15 / QE > 8000.0) saturated++;
        pixInTest = 0.6;              // rising step: no charge
        #10 chk(expect_bits(steps[s], n), "rising step adds nothing");
        #10 bxclk_ana = 0;            // auto-zero
        #1 chk(3'b000, "auto-zero output");
        // a step during auto-zero is cancelled by the next rising edge
        pixInTest = 0.0;
        #10 bxclk_ana = 1;
        #10 chk(3'b000, "charge from auto-zero phase ignored");
        az_rejected++;
        bxclk_ana = 0;
        #5 pixInTest = 0.6;
        #5;
      end
    // two steps in one sampling phase add up
    config_pix = 2'd1; bxclk_ana = 1;
    #10 pixInTest = 0.55;
    #10 pixInTest = 0.45;
    #10 chk(expect_bits(0.15, 1), "two steps accumulate");
    checks++;
    if (saturated == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("auto-zero rejections=%0d saturated injections=%0d", az_rejected, saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
