// tb_workload_thresholds -- the evaluation runs of the published chip, as far
// as they can be reproduced without the trained weights:
//   A. 10,000 random y-profiles through the classifier, each compared with the
//      integer reference network (the published chip-versus-RTL comparison
//      used 10,000 vectors); reports the fraction classified low pT.
//   B. one superpixel at default size with fixed random weights and a few
//      programmed charge clusters, each pulsed at several step amplitudes under
//      the three threshold sets evaluated for the chip: [80, 160, 320] mV,
//      [400, 1600, 2400] e- and [1000, 1600, 2400] e- (converted at
//      58.5 uV/e-). Every y-profile bus and the class are checked against an
//      independent model; each threshold set must see every pixel code 0..3.
module tb_workload_thresholds;
  import smartpix_pkg::*;
  import tb_nn_ref_pkg::*;

  localparam real QE = 1.602176634e-19;
  localparam real CVG = 58.5e-6;
  localparam real V0 = 0.6;

  // ---- A: classifier alone ----
  logic        [SUM_W-1:0] a_prof [N_IN];
  logic signed [W_W-1:0]   a_w1 [N_HID][N_IN];
  logic signed [B_W-1:0]   a_b1 [N_HID];
  logic signed [W_W-1:0]   a_w2 [N_OUT][N_HID];
  logic signed [B_W-1:0]   a_b2 [N_OUT];
  dnn_out_t                a_out;

  pt_filter_nn u_nn (.y_prof(a_prof), .w1(a_w1), .b1(a_b1), .w2(a_w2), .b2(a_b2), .dnn_out(a_out));

  // ---- B: one superpixel ----
  real  pixInTest, vth0, vth1, vth2;
  logic bxclk_ana = 0, bxclk = 0, reset_n = 1, scan_load = 0, scan_in = 0, scan_out;
  logic config_clk = 0, config_load = 0, config_in = 0, config_out;
  logic [SUM_W-1:0] y_prof [N_BUS];
  dnn_out_t dnn_out;

  superpixel u_sp (
    .pixInTest(pixInTest), .vth0(vth0), .vth1(vth1), .vth2(vth2),
    .bxclk_ana(bxclk_ana), .bxclk(bxclk), .reset_n(reset_n), .scan_load(scan_load),
    .scan_in(scan_in), .scan_out(scan_out), .config_clk(config_clk), .config_load(config_load),
    .config_in(config_in), .config_out(config_out), .y_prof(y_prof), .dnn_out(dnn_out)
  );

  int checks = 0, failures = 0;
  int units [N_PIX];
  nn_params_t p;
  int code_seen [3][4];

  initial begin
    #1000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic int pix_code(input real dv, input int n);
    real q, v;
    q = dv * n * 1.85e-15 / QE;
    if (q > 8000.0) q = 8000.0;
    v = q * CVG;
    return int'(v >= vth0) + int'(v >= vth1) + int'(v >= vth2);
  endfunction

  initial begin
    int low = 0;
    real th [3][3];
    real dvs [6] = '{0.02, 0.05, 0.1, 0.2, 0.3, 0.45};
    bit chain[$], wimg[$];

    // ---------------- A ----------------
    p = random_params();
    for (int o = 0; o < N_HID; o++) begin
      for (int i = 0; i < N_IN; i++) a_w1[o][i] = W_W'(p.w1[o][i]);
      a_b1[o] = B_W'(p.b1[o]);
    end
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_HID; i++) a_w2[o][i] = W_W'(p.w2[o][i]);
      a_b2[o] = B_W'(p.b2[o]);
    end
    for (int t = 0; t < 10000; t++) begin
      int prof [N_IN];
      int e;
      // cluster-like profile: a few adjacent non-empty rows
      int r0, nr;
      r0 = $urandom_range(15); nr = 1 + $urandom_range(5);
      for (int i = 0; i < N_IN; i++) begin
        prof[i] = (i >= r0 && i < r0 + nr) ? int'($urandom_range(48)) : 0;
        a_prof[i] = SUM_W'(prof[i]);
      end
      e = nn_class(p, prof);
      #1;
      chk(int'(a_out) == e, $sformatf("vector %0d: class %0d expected %0d", t, a_out, e));
      if (e != 0) low++;
    end
    $display("A: 10000 vectors, classified low pT: %0d", low);

    // ---------------- B ----------------
    th[0] = '{0.080, 0.160, 0.320};
    th[1] = '{400.0 * CVG, 1600.0 * CVG, 2400.0 * CVG};
    th[2] = '{1000.0 * CVG, 1600.0 * CVG, 2400.0 * CVG};
    for (int s = 0; s < 3; s++) for (int c = 0; c < 4; c++) code_seen[s][c] = 0;
    pixInTest = V0;
    for (int cl = 0; cl < 3; cl++) begin
      // program a cluster: 3 rows x 5 columns of 1..3 units
      int r0, c0;
      r0 = $urandom_range(12); c0 = $urandom_range(10);
      for (int q = 0; q < N_PIX; q++) units[q] = 0;
      for (int r = r0; r < r0 + 3; r++)
        for (int c = c0; c < c0 + 5; c++) units[16*r + c] = 1 + $urandom_range(2);
      chain.delete();
      for (int q = 0; q < N_PIX; q++)
        for (int b = 0; b < CFG_BITS; b++) chain.push_back(bit'((units[q] >> b) & 1));
      image(p, wimg);
      foreach (wimg[k]) chain.push_back(wimg[k]);
      for (int k = chain.size() - 1; k >= 0; k--) begin
        config_in = logic'(chain[k]); config_load = 1;
        #5 config_clk = 1;
        #5 config_clk = 0;
      end
      config_load = 0;
      for (int s = 0; s < 3; s++) begin
        vth0 = th[s][0]; vth1 = th[s][1]; vth2 = th[s][2];
        foreach (dvs[d]) begin
          int prof [N_IN];
          for (int r = 0; r < N_IN; r++) prof[r] = 0;
          for (int q = 0; q < N_PIX; q++) begin
            int k;
            k = pix_code(dvs[d], units[q]);
            prof[q / 16] += k;
            code_seen[s][k]++;
          end
          bxclk_ana = 1;
          #20 pixInTest = V0 - dvs[d];
          #20;
          for (int r = 0; r < N_IN; r++)
            chk(int'(y_prof[r]) == prof[r], $sformatf("set %0d dv %0.2f row %0d: %0d expected %0d",
                s, dvs[d], r, y_prof[r], prof[r]));
          chk(int'(dnn_out) == nn_class(p, prof), $sformatf("set %0d dv %0.2f class", s, dvs[d]));
          #10 bxclk_ana = 0;
          #40 pixInTest = V0;
          #10;
        end
      end
    end
    for (int s = 0; s < 3; s++) begin
      $display("B: threshold set %0d pixel codes 0/1/2/3: %0d %0d %0d %0d", s,
               code_seen[s][0], code_seen[s][1], code_seen[s][2], code_seen[s][3]);
      for (int c = 1; c < 4; c++) chk(code_seen[s][c] > 0, $sformatf("set %0d never gave code %0d", s, c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
