// superpixel -- one 256-pixel array with its in-pixel digital logic and the
// pT-filter network that reads it.
//
// Data path in normal operation (all combinational after the latches):
//   pixel_afe (3 comparator bits) -> adc_latch (held through auto-zero)
//   -> thermo_encoder (2-bit code) -> y_projection (16 x 6-bit y-profile)
//   -> pt_filter_nn -> dnn_out (2-bit pT class).
// Test mode: the latched thermometric bits are loaded into the 768-bit
// scan_chain by BxCLK with ScanLoad = 1 and shifted out on scan_out.
// Configuration: one serial chain, config_in -> pixel capacitor selects
// (2 bits x 256 pixels) -> network weights and biases -> config_out.
// The block structure follows the paper; appending the weight register to
// the pixel configuration chain is this design's choice.
//
// Interface: analog pixInTest and vth0..2 (real, volts), bxclk_ana (event
// clock), bxclk (scan clock), reset_n (scan chain clear), scan_load,
// scan_in/scan_out, config_clk/config_load/config_in/config_out,
// y_prof[16] (the y-profile, observable for readout), dnn_out.
// The scan chain's parallel view (pix_out) is left unconnected here: only
// its serial output leaves the chip.
// Timing: a charge step injected while bxclk_ana = 1 reaches y_prof and
// dnn_out with no clock; the values hold until the next sampling phase.
module superpixel
  import smartpix_pkg::*;
(
  input  real                    pixInTest,
  input  real                    vth0,
  input  real                    vth1,
  input  real                    vth2,
  input  logic                   bxclk_ana,
  input  logic                   bxclk,
  input  logic                   reset_n,
  input  logic                   scan_load,
  input  logic                   scan_in,
  output logic                   scan_out,
  input  logic                   config_clk,
  input  logic                   config_load,
  input  logic                   config_in,
  output logic                   config_out,
  output logic [SUM_W-1:0]       y_prof [N_BUS],
  output dnn_out_t               dnn_out
);
  logic [CFG_BITS-1:0]       config_pix [N_PIX];
  logic [ADC_BITS-1:0]       adc_raw    [N_PIX];
  logic [ADC_BITS-1:0]       adc_held   [N_PIX];
  logic [BIN_BITS-1:0]       pix_bin    [N_PIX];
  logic [N_PIX*ADC_BITS-1:0] scan_par;
  logic                      cfg_mid;

  logic signed [W_W-1:0] w1 [N_HID][N_IN];
  logic signed [B_W-1:0] b1 [N_HID];
  logic signed [W_W-1:0] w2 [N_OUT][N_HID];
  logic signed [B_W-1:0] b2 [N_OUT];

  for (genvar p = 0; p < N_PIX; p++) begin : g_pix
    pixel_afe u_afe (
      .pixInTest (pixInTest),
      .vth0      (vth0),
      .vth1      (vth1),
      .vth2      (vth2),
      .bxclk_ana (bxclk_ana),
      .config_pix(config_pix[p]),
      .adc_out   (adc_raw[p])
    );
    adc_latch #(.W(ADC_BITS)) u_latch (.en(bxclk_ana), .d(adc_raw[p]), .q(adc_held[p]));
    thermo_encoder u_enc (.therm(adc_held[p]), .bin(pix_bin[p]));
    assign scan_par[p*ADC_BITS +: ADC_BITS] = adc_held[p];
  end

  pixel_config_reg u_cfg (
    .config_clk (config_clk),
    .config_load(config_load),
    .config_in  (config_in),
    .config_out (cfg_mid),
    .config_pix (config_pix)
  );

  nn_weight_reg u_wreg (
    .clk (config_clk),
    .load(config_load),
    .sin (cfg_mid),
    .sout(config_out),
    .w1  (w1),
    .b1  (b1),
    .w2  (w2),
    .b2  (b2)
  );

  scan_chain u_scan (
    .bxclk    (bxclk),
    .reset_n  (reset_n),
    .scan_load(scan_load),
    .scan_in  (scan_in),
    .par_in   (scan_par),
    .scan_out (scan_out),
    .pix_out  ()
  );

  y_projection u_yproj (.pix_bin(pix_bin), .y_prof(y_prof));

  pt_filter_nn u_nn (
    .y_prof (y_prof),
    .w1     (w1),
    .b1     (b1),
    .w2     (w2),
    .b2     (b2),
    .dnn_out(dnn_out)
  );
endmodule
