// tb_nn_dense -- the 16x58 layer with random inputs, weights and biases
// (plus all-maximum and all-minimum corners) against integer dot products.
module tb_nn_dense;
  localparam int N_I = 16, N_O = 58, IN_W = 6, W_W = 4, B_W = 8;
  localparam int ACC_W = IN_W + W_W + $clog2(N_I) + 1;
  logic        [IN_W-1:0]  x [N_I];
  logic signed [W_W-1:0]   w [N_O][N_I];
  logic signed [B_W-1:0]   b [N_O];
  logic signed [ACC_W-1:0] y [N_O];
  int checks = 0, failures = 0;

  nn_dense #(.N_I(N_I), .N_O(N_O), .IN_W(IN_W), .W_W(W_W), .B_W(B_W)) dut (.x(x), .w(w), .b(b), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 30; t++) begin
      int xv [N_I];
      int wv [N_O][N_I];
      int bv [N_O];
      for (int i = 0; i < N_I; i++) begin
        xv[i] = (t < 2) ? 63 : int'($urandom_range(48));
        x[i] = IN_W'(xv[i]);
      end
      for (int o = 0; o < N_O; o++) begin
        for (int i = 0; i < N_I; i++) begin
          wv[o][i] = (t == 0) ? 7 : (t == 1) ? -8 : int'($urandom_range(15)) - 8;
          w[o][i] = W_W'(wv[o][i]);
        end
        bv[o] = (t == 0) ? 127 : (t == 1) ? -128 : int'($urandom_range(255)) - 128;
        b[o] = B_W'(bv[o]);
      end
      #1;
      for (int o = 0; o < N_O; o++) begin
        int e;
        e = bv[o];
        for (int i = 0; i < N_I; i++) e += wv[o][i] * xv[i];
        checks++;
        if (int'(y[o]) != e) begin
          failures++;
          $display("FAIL t=%0d neuron %0d y=%0d expected %0d", t, o, y[o], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
