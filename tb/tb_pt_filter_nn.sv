// tb_pt_filter_nn -- random weight sets and random y-profiles (0..48 per bus)
// against the integer reference network; counts how often each class wins.
module tb_pt_filter_nn;
  import smartpix_pkg::*;
  import tb_nn_ref_pkg::*;
  logic        [SUM_W-1:0] y_prof [N_IN];
  logic signed [W_W-1:0]   w1 [N_HID][N_IN];
  logic signed [B_W-1:0]   b1 [N_HID];
  logic signed [W_W-1:0]   w2 [N_OUT][N_HID];
  logic signed [B_W-1:0]   b2 [N_OUT];
  dnn_out_t                dnn_out;
  int checks = 0, failures = 0;
  int seen [N_OUT];

  pt_filter_nn dut (.y_prof(y_prof), .w1(w1), .b1(b1), .w2(w2), .b2(b2), .dnn_out(dnn_out));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < N_OUT; c++) seen[c] = 0;
    for (int set = 0; set < 10; set++) begin
      nn_params_t p;
      p = random_params();
      for (int o = 0; o < N_HID; o++) begin
        for (int i = 0; i < N_IN; i++) w1[o][i] = W_W'(p.w1[o][i]);
        b1[o] = B_W'(p.b1[o]);
      end
      for (int o = 0; o < N_OUT; o++) begin
        for (int i = 0; i < N_HID; i++) w2[o][i] = W_W'(p.w2[o][i]);
        b2[o] = B_W'(p.b2[o]);
      end
      for (int t = 0; t < 100; t++) begin
        int prof [N_IN];
        int e;
        for (int i = 0; i < N_IN; i++) begin
          prof[i] = (t == 0) ? 48 : (t == 1) ? 0 : int'($urandom_range(48));
          y_prof[i] = SUM_W'(prof[i]);
        end
        e = nn_class(p, prof);
        #1;
        seen[e]++;
        checks++;
        if (int'(dnn_out) != e) begin
          failures++;
          $display("FAIL set %0d vector %0d: class %0d expected %0d", set, t, dnn_out, e);
        end
      end
    end
    $display("classes seen: high=%0d low-neg=%0d low-pos=%0d", seen[0], seen[1], seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
