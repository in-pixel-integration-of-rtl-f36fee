// tb_y_projection -- random pixel codes (and the all-3 corner) against row sums.
module tb_y_projection;
  import smartpix_pkg::*;
  logic [1:0]       pix_bin [N_PIX];
  logic [SUM_W-1:0] y_prof  [N_BUS];
  int checks = 0, failures = 0;

  y_projection dut (.pix_bin(pix_bin), .y_prof(y_prof));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      int expect_sum [N_BUS];
      for (int r = 0; r < 16; r++) expect_sum[r] = 0;
      for (int r = 0; r < 16; r++)
        for (int c = 0; c < 16; c++) begin
          int v;
          v = (t == 0) ? 3 : (t == 1) ? 0 : int'($urandom_range(3));
          pix_bin[r*16 + c] = 2'(v);
          expect_sum[r] += v;
        end
      #1;
      for (int r = 0; r < 16; r++) begin
        checks++;
        if (int'(y_prof[r]) != expect_sum[r]) begin
          failures++;
          $display("FAIL t=%0d row %0d sum %0d expected %0d", t, r, y_prof[r], expect_sum[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
