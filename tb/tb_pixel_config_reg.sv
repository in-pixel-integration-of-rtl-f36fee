// tb_pixel_config_reg -- shifts a random 512-bit image in, with configLoad
// dropped on some clock edges, and checks every pixel's capacitor select and
// the serial output (the chain delayed by 512 loaded edges).
module tb_pixel_config_reg;
  import smartpix_pkg::*;
  localparam int LEN = N_PIX * CFG_BITS;
  logic config_clk = 0, config_load = 0, config_in = 0, config_out;
  logic [CFG_BITS-1:0] config_pix [N_PIX];
  bit sent[$];
  int checks = 0, failures = 0;

  pixel_config_reg dut (.config_clk(config_clk), .config_load(config_load), .config_in(config_in),
                        .config_out(config_out), .config_pix(config_pix));

  always #5 config_clk = ~config_clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Two full images with idle edges mixed in; each bit reaches config_out
    // LEN loaded edges after it was sent.
    for (int n = 0; n < 2 * LEN; n++) begin
      bit b;
      b = bit'($urandom_range(1));
      // idle edge with load low: nothing may move
      if (n % 37 == 5) begin
        @(negedge config_clk); config_load = 0; config_in = ~b;
      end
      @(negedge config_clk);
      config_load = 1; config_in = b;
      sent.push_back(b);
      @(posedge config_clk);
      #1;
      if (sent.size() > LEN) begin
        checks++;
        if (config_out !== logic'(sent[sent.size() - LEN])) begin
          failures++;
          $display("FAIL config_out after %0d bits", sent.size());
        end
      end
    end
    @(negedge config_clk); config_load = 0;
    // The last LEN bits sent: the first of them sits in pixel N_PIX-1 bit 1.
    for (int p = 0; p < N_PIX; p++)
      for (int k = 0; k < CFG_BITS; k++) begin
        int pos;
        pos = p * CFG_BITS + k;             // register position
        checks++;
        if (config_pix[p][k] !== logic'(sent[sent.size() - 1 - pos])) begin
          failures++;
          $display("FAIL pixel %0d bit %0d", p, k);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
