// tb_smartpix_asic -- end-to-end test of the chip at its default size (two
// superpixels of 256 pixels, 16-58-3 network), run as the test system would:
//   1. reset, then shift the scan chains out and check they were cleared;
//   2. per event, program each superpixel's configuration chain with random
//      network weights and a random charge cluster (0..3 injection units per
//      pixel), checking that the previous image leaves on config_out;
//   3. inject a pixInTest step inside the sampling phase (BxCLK_ANA = 1) and
//      check the 16-bus y-profile and DnnOut against an independent model
//      (charge -> comparator bits -> counts -> row sums -> integer network);
//   4. load the scan chain with BxCLK before BxCLK_ANA falls, check that the
//      latched result holds through auto-zero, then shift all 768 bits out
//      and compare them in order pix0[0] .. pix255[2];
//   5. on some events inject during auto-zero instead and check it is ignored.
// The comparator thresholds are the paper's [80, 160, 320] mV set, and the
// clocks run at the paper's 10 MHz test rate with the scan clock 40 ns after
// the event clock. Each mechanism is counted and must occur at least once.
module tb_smartpix_asic;
  import smartpix_pkg::*;
  import tb_nn_ref_pkg::*;

  localparam int NSP     = 2;                    // the top's default N_SP
  localparam int PIX_LEN = N_PIX * CFG_BITS;     // 512
  localparam int SCAN_LEN = N_PIX * ADC_BITS;    // 768
  localparam real QE = 1.602176634e-19;
  localparam real V0 = 0.6;                      // pixInTest resting level

  real  pixInTest, vth0, vth1, vth2;
  logic bxclk_ana, bxclk, reset_n, scan_load, config_clk, config_load;
  logic config_in [NSP], config_out [NSP], scan_in [NSP], scan_out [NSP];
  logic [SUM_W-1:0] y_prof [NSP][N_BUS];
  dnn_out_t dnn_out [NSP];

  smartpix_asic dut (
    .pixInTest(pixInTest), .vth0(vth0), .vth1(vth1), .vth2(vth2),
    .bxclk_ana(bxclk_ana), .bxclk(bxclk), .reset_n(reset_n), .scan_load(scan_load),
    .config_clk(config_clk), .config_load(config_load),
    .config_in(config_in), .config_out(config_out),
    .scan_in(scan_in), .scan_out(scan_out), .y_prof(y_prof), .dnn_out(dnn_out)
  );

  int checks = 0, failures = 0;
  int n_reset_clear = 0, n_config_loads = 0, n_config_pass = 0, n_injections = 0;
  int n_az_reject = 0, n_scan_loads = 0, n_scan_shifts = 0, n_latch_hold = 0;
  int n_saturated = 0, n_cleared = 0;
  int n_class [3] = '{0, 0, 0};

  // Current and previous chain images per superpixel (bit k = register bit k)
  bit chain_now  [NSP][$];
  bit chain_prev [NSP][$];
  int  units [NSP][N_PIX];
  nn_params_t params [NSP];

  initial begin
    #2000000000;
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

  // Expected thermometric bits of a pixel with n injection units and step dv
  function automatic logic [2:0] pix_bits(input real dv, input int n);
    real q, v;
    q = dv * n * 1.85e-15 / QE;
    if (q > 8000.0) q = 8000.0;
    v = q * 58.5e-6;
    return {v >= vth2, v >= vth1, v >= vth0};
  endfunction

  function automatic bit saturates(input real dv, input int n);
    return dv * n * 1.85e-15 / QE > 8000.0;
  endfunction

  // One configuration clock with load high; inputs change on the low phase.
  task automatic program_chains();
    int len;
    len = chain_now[0].size();
    for (int k = len - 1; k >= 0; k--) begin
      for (int s = 0; s < NSP; s++) config_in[s] = logic'(chain_now[s][k]);
      config_load = 1;
      #5 config_clk = 1;
      #5 config_clk = 0;
      // the register's top bit now holds what was at len-2 before
      if (chain_prev[0].size() == len && k > 0)
        for (int s = 0; s < NSP; s++)
          chk(config_out[s] == logic'(chain_prev[s][k - 1]),
              $sformatf("config_out sp%0d bit %0d", s, k - 1));
    end
    config_load = 0;
    if (chain_prev[0].size() == len) n_config_pass++;
    n_config_loads++;
  endtask

  // Build a chain image: bits 0..511 pixel selects, then the weight image.
  task automatic build_chain(input int s);
    bit wimg[$];
    chain_prev[s] = chain_now[s];
    chain_now[s].delete();
    for (int p = 0; p < N_PIX; p++)
      for (int b = 0; b < CFG_BITS; b++) chain_now[s].push_back(bit'((units[s][p] >> b) & 1));
    image(params[s], wimg);
    foreach (wimg[k]) chain_now[s].push_back(wimg[k]);
  endtask

  // Random cluster of injection units in a box of up to 4 rows x 6 columns.
  task automatic random_cluster(input int s);
    int r0, c0, nr, nc;
    for (int p = 0; p < N_PIX; p++) units[s][p] = 0;
    r0 = $urandom_range(15); c0 = $urandom_range(15);
    nr = 1 + $urandom_range(3); nc = 1 + $urandom_range(5);
    for (int r = r0; r < r0 + nr && r < 16; r++)
      for (int c = c0; c < c0 + nc && c < 16; c++)
        units[s][16*r + c] = $urandom_range(3);
  endtask

  // Check y-profiles and DnnOut against the model; returns nothing.
  task automatic check_outputs(input real dv, input string when, input bit count_classes);
    for (int s = 0; s < NSP; s++) begin
      int prof [N_IN];
      int cls;
      for (int r = 0; r < N_BUS; r++) prof[r] = 0;
      for (int p = 0; p < N_PIX; p++) begin
        logic [2:0] b;
        b = pix_bits(dv, units[s][p]);
        prof[p / 16] += int'(b[0]) + int'(b[1]) + int'(b[2]);
      end
      for (int r = 0; r < N_BUS; r++)
        chk(int'(y_prof[s][r]) == prof[r],
            $sformatf("%s sp%0d y_prof[%0d]=%0d expected %0d", when, s, r, y_prof[s][r], prof[r]));
      cls = nn_class(params[s], prof);
      chk(int'(dnn_out[s]) == cls, $sformatf("%s sp%0d DnnOut=%0d expected %0d", when, s, dnn_out[s], cls));
      if (count_classes) n_class[cls]++;
    end
  endtask

  // One 100 ns bunch crossing. inject: 0 none, 1 in sampling phase,
  // 2 during auto-zero. load: pulse ScanLoad on this BxCLK edge.
  task automatic bunch_crossing(input int inject, input real dv, input bit load, input bit shift);
    bxclk_ana = 1;                                   // t = 0
    #20 if (inject == 1) pixInTest = V0 - dv;        // t = 20 (Tinj)
    #15;                                             // t = 35
    if (inject == 1) check_outputs(dv, "sampling", 1);
    scan_load = load;
    #5 if (load || shift) bxclk = 1;                 // t = 40: BxCLK_Delay
    #10 bxclk_ana = 0;                               // t = 50: auto-zero
    scan_load = 0;
    if (inject == 2) pixInTest = V0 - dv;            // charge during auto-zero
    #20;                                             // t = 70
    if (inject == 1) begin
      check_outputs(dv, "auto-zero hold", 0);
      n_latch_hold++;
    end
    #20 bxclk = 0;                                   // t = 90
    pixInTest = V0;                                  // rising step: no charge
    #10;                                             // t = 100
  endtask

  // Shift the scan chains out and compare with the expected bits.
  task automatic scan_out_check(input real dv, input bit expect_zero);
    for (int k = 0; k < SCAN_LEN; k++) begin
      for (int s = 0; s < NSP; s++) begin
        logic [2:0] b;
        b = expect_zero ? 3'b000 : pix_bits(dv, units[s][k / 3]);
        chk(scan_out[s] == b[k % 3], $sformatf("scanOut sp%0d pix%0d[%0d]", s, k / 3, k % 3));
        scan_in[s] = 1'b0;
      end
      if (k < SCAN_LEN - 1) begin
        bunch_crossing(0, 0.0, 0, 1);
        n_scan_shifts++;
      end
    end
  endtask

  initial begin
    real steps [3] = '{0.1, 0.2, 0.3};
    int ev;
    pixInTest = V0; vth0 = 0.08; vth1 = 0.16; vth2 = 0.32;
    bxclk_ana = 0; bxclk = 0; reset_n = 1; scan_load = 0;
    config_clk = 0; config_load = 0;
    for (int s = 0; s < NSP; s++) begin config_in[s] = 0; scan_in[s] = 0; end
    #10 reset_n = 0;                    // Reset_not pulse (asynchronous clear)
    #50 reset_n = 1;
    #50;
    // 1. the reset left the scan chains empty
    scan_out_check(0.0, 1);
    n_reset_clear++;

    ev = 0;
    while (ev < 8 || ((n_class[0] == 0 || n_class[1] == 0 || n_class[2] == 0) && ev < 60)) begin
      real dv;
      dv = steps[$urandom_range(2)];
      for (int s = 0; s < NSP; s++) begin
        if (ev % 4 == 0) params[s] = random_params();
        random_cluster(s);
        if (ev == 0) begin
          dv = 0.3;                 // 3 units x 0.3 V is past the 8000 e- limit
          units[s][0] = 3;
        end
        build_chain(s);
        for (int p = 0; p < N_PIX; p++) if (saturates(dv, units[s][p])) n_saturated++;
      end
      program_chains();
      if (ev % 5 == 3) begin
        // charge arriving in auto-zero must not be seen in the next sample
        bunch_crossing(2, dv, 0, 0);
        bunch_crossing(0, 0.0, 1, 0);
        n_scan_loads++;
        for (int s = 0; s < NSP; s++)
          for (int r = 0; r < N_BUS; r++)
            chk(y_prof[s][r] == '0, $sformatf("auto-zero charge leaked sp%0d row %0d", s, r));
        scan_out_check(0.0, 1);
        n_az_reject++;
      end else begin
        bunch_crossing(1, dv, 1, 0);
        n_injections++;
        n_scan_loads++;
        scan_out_check(dv, 0);
        // the shifting crossings had no charge: the profile is empty again
        for (int s = 0; s < NSP; s++)
          for (int r = 0; r < N_BUS; r++)
            chk(y_prof[s][r] == '0, $sformatf("profile not cleared sp%0d row %0d", s, r));
        n_cleared++;
      end
      ev++;
    end

    $display("events=%0d injections=%0d az_rejections=%0d config_loads=%0d config_passthrough=%0d",
             ev, n_injections, n_az_reject, n_config_loads, n_config_pass);
    $display("scan_loads=%0d scan_shifts=%0d latch_holds=%0d saturated_pixels=%0d cleared=%0d reset_clear=%0d",
             n_scan_loads, n_scan_shifts, n_latch_hold, n_saturated, n_cleared, n_reset_clear);
    $display("DnnOut classes: high-pT=%0d low-pT-neg=%0d low-pT-pos=%0d", n_class[0], n_class[1], n_class[2]);
    chk(n_reset_clear > 0, "reset never checked");
    chk(n_injections > 0, "no injection");
    chk(n_az_reject > 0, "auto-zero rejection never exercised");
    chk(n_config_pass > 0, "configuration pass-through never checked");
    chk(n_scan_loads > 0 && n_scan_shifts > 0, "scan chain never used");
    chk(n_latch_hold > 0, "latch hold never checked");
    chk(n_saturated > 0, "preamp saturation never exercised");
    chk(n_class[0] > 0, "class high-pT never produced");
    chk(n_class[1] > 0, "class low-pT negative never produced");
    chk(n_class[2] > 0, "class low-pT positive never produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
