// smartpix_asic -- top level of the smart-pixel readout chip: two 256-pixel
// superpixels, each reducing its pixel data in place to a y-profile and a
// 2-bit pT class, with a scan chain for raw-data readout in test mode.
//
// The two superpixels (the paper's SP1 and SP2) differ only in the analog
// design of their ADC, which the ideal pixel model does not distinguish, so
// both use the same `superpixel`. They share the event clock BxCLK_ANA, the
// scan clock BxCLK, Reset_not, ScanLoad, the configuration clock and load,
// the global injection line pixInTest and the three threshold lines VTH0..2
// (the paper describes a common bias grid and a global pulse line). Giving
// each superpixel its own serial configuration, scan and DnnOut pins is this
// design's choice; the paper does not say whether they are shared.
// Analog bias pins (i_bias) and the matrix bias block have no logic function
// and are not part of this model.
//
// Interface: per superpixel s: config_in[s]/config_out[s], scan_in[s]/
// scan_out[s], y_prof[s][16], dnn_out[s]; shared clocks and analog inputs.
// Timing: see superpixel; dnn_out is valid from the injection step inside a
// sampling phase (bxclk_ana = 1) until the next sampling phase starts.
module smartpix_asic
  import smartpix_pkg::*;
#(
  parameter int unsigned N_SP = 2
) (
  input  real              pixInTest,
  input  real              vth0,
  input  real              vth1,
  input  real              vth2,
  input  logic             bxclk_ana,
  input  logic             bxclk,
  input  logic             reset_n,
  input  logic             scan_load,
  input  logic             config_clk,
  input  logic             config_load,
  input  logic             config_in  [N_SP],
  output logic             config_out [N_SP],
  input  logic             scan_in    [N_SP],
  output logic             scan_out   [N_SP],
  output logic [SUM_W-1:0] y_prof     [N_SP][N_BUS],
  output dnn_out_t         dnn_out    [N_SP]
);
  for (genvar s = 0; s < N_SP; s++) begin : g_sp
    superpixel u_sp (
      .pixInTest  (pixInTest),
      .vth0       (vth0),
      .vth1       (vth1),
      .vth2       (vth2),
      .bxclk_ana  (bxclk_ana),
      .bxclk      (bxclk),
      .reset_n    (reset_n),
      .scan_load  (scan_load),
      .scan_in    (scan_in[s]),
      .scan_out   (scan_out[s]),
      .config_clk (config_clk),
      .config_load(config_load),
      .config_in  (config_in[s]),
      .config_out (config_out[s]),
      .y_prof     (y_prof[s]),
      .dnn_out    (dnn_out[s])
    );
  end
endmodule
