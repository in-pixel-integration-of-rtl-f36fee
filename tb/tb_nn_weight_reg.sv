// tb_nn_weight_reg -- shifts a random weight image in (MSB first) and checks
// every weight and bias field, then checks that a second image pushes the
// first one out of sout bit for bit.
module tb_nn_weight_reg;
  import smartpix_pkg::*;
  import tb_nn_ref_pkg::*;
  logic clk = 0, load = 0, sin = 0, sout;
  logic signed [W_W-1:0] w1 [N_HID][N_IN];
  logic signed [B_W-1:0] b1 [N_HID];
  logic signed [W_W-1:0] w2 [N_OUT][N_HID];
  logic signed [B_W-1:0] b2 [N_OUT];
  int checks = 0, failures = 0;

  nn_weight_reg dut (.clk(clk), .load(load), .sin(sin), .sout(sout), .w1(w1), .b1(b1), .w2(w2), .b2(b2));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    nn_params_t p, q;
    bit img[$], img2[$];
    p = random_params();
    image(p, img);
    for (int k = img.size() - 1; k >= 0; k--) begin
      @(negedge clk); load = 1; sin = img[k];
    end
    @(negedge clk); load = 0; sin = 0;
    repeat (3) @(negedge clk);   // idle edges must not shift
    for (int o = 0; o < N_HID; o++) begin
      for (int i = 0; i < N_IN; i++) chk(int'(w1[o][i]), p.w1[o][i], $sformatf("w1[%0d][%0d]", o, i));
      chk(int'(b1[o]), p.b1[o], $sformatf("b1[%0d]", o));
    end
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_HID; i++) chk(int'(w2[o][i]), p.w2[o][i], $sformatf("w2[%0d][%0d]", o, i));
      chk(int'(b2[o]), p.b2[o], $sformatf("b2[%0d]", o));
    end
    chk(img.size(), N_HID*N_IN*W_W + N_HID*B_W + N_OUT*N_HID*W_W + N_OUT*B_W, "image length");
    q = random_params();
    image(q, img2);
    for (int k = img2.size() - 1; k >= 0; k--) begin
      chk(int'(sout), int'(img[k]), $sformatf("sout bit %0d", k));
      @(negedge clk); load = 1; sin = img2[k];
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
