// tb_nn_relu -- random signed inputs (and the extremes) against max(x, 0).
module tb_nn_relu;
  localparam int N = 58, IN_W = 15;
  logic signed [IN_W-1:0] x [N];
  logic        [IN_W-2:0] y [N];
  int checks = 0, failures = 0;

  nn_relu #(.N(N), .IN_W(IN_W)) dut (.x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      int v [N];
      for (int n = 0; n < N; n++) begin
        v[n] = int'($urandom_range(32767)) - 16384;
        if (t == 0) v[n] = (n % 2) ? -16384 : 16383;
        x[n] = IN_W'(v[n]);
      end
      #1;
      for (int n = 0; n < N; n++) begin
        checks++;
        if (int'(y[n]) != ((v[n] < 0) ? 0 : v[n])) begin
          failures++;
          $display("FAIL x=%0d y=%0d", v[n], y[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
