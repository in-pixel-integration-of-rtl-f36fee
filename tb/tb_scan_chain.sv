// tb_scan_chain -- reset, then a parallel load of random bits followed by
// 767 shifts: scan_out must give pix0[0], pix0[1], ... pix255[2] in turn,
// after which the bits fed on scan_in appear. A second load checks that a
// load overwrites the chain, and reset clears it.
module tb_scan_chain;
  import smartpix_pkg::*;
  localparam int LEN = N_PIX * ADC_BITS;
  logic bxclk = 0, reset_n = 0, scan_load = 0, scan_in = 0, scan_out;
  logic [LEN-1:0] par_in, pix_out;
  bit tail [$];
  int checks = 0, failures = 0;

  scan_chain dut (.bxclk(bxclk), .reset_n(reset_n), .scan_load(scan_load), .scan_in(scan_in),
                  .par_in(par_in), .scan_out(scan_out), .pix_out(pix_out));

  always #5 bxclk = ~bxclk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    par_in = '0;
    #12;
    checks++;
    if (pix_out !== '0) begin failures++; $display("FAIL reset"); end
    reset_n = 1;
    for (int round = 0; round < 2; round++) begin
      logic [LEN-1:0] img;
      for (int k = 0; k < LEN; k++) img[k] = logic'($urandom_range(1));
      @(negedge bxclk); par_in = img; scan_load = 1;
      @(negedge bxclk); scan_load = 0; par_in = ~img;  // par_in no longer matters
      tail.delete();
      for (int k = 0; k < LEN; k++) begin
        check(scan_out, img[k], $sformatf("round %0d bit %0d (pix%0d[%0d])", round, k, k / 3, k % 3));
        scan_in = logic'($urandom_range(1));
        tail.push_back(bit'(scan_in));
        @(negedge bxclk);
      end
      // everything shifted in is now in the chain, first bit at position 0
      for (int k = 0; k < 8; k++) begin
        check(scan_out, logic'(tail[k]), $sformatf("scan_in bit %0d", k));
        @(negedge bxclk);
      end
    end
    reset_n = 0; #1;
    checks++;
    if (pix_out !== '0) begin failures++; $display("FAIL async reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
