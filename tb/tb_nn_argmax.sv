// tb_nn_argmax -- random scores, many with ties, against a reference argmax
// that picks the lowest index among equal maxima.
module tb_nn_argmax;
  localparam int N = 3, W = 25;
  logic signed [W-1:0] x [N];
  logic [1:0] idx;
  int checks = 0, failures = 0;

  nn_argmax #(.N(N), .W(W)) dut (.x(x), .idx(idx));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int v [N];
      int best;
      for (int n = 0; n < N; n++) begin
        v[n] = (t % 2) ? int'($urandom_range(6)) - 3 : int'($urandom_range(2000000)) - 1000000;
        x[n] = W'(v[n]);
      end
      best = 0;
      if (v[1] > v[best]) best = 1;
      if (v[2] > v[best]) best = 2;
      #1;
      checks++;
      if (int'(idx) != best) begin
        failures++;
        $display("FAIL %0d %0d %0d -> %0d expected %0d", v[0], v[1], v[2], idx, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
