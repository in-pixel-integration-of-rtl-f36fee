// pixel_afe -- behavioural model (not synthesizable logic) of one pixel's
// analog front end: test-charge injection, charge preamplifier and the 2-bit
// flash ADC of three auto-zeroed comparators.
//
// Charge: a falling step of the global pixInTest line injects
// Q = dV * C_TOT / q_e electrons, where C_TOT is C0 when config_pix[0] is set
// plus 2*C0 when config_pix[1] is set (C0 = 1.85 fF, so 3*C0 = 5.55 fF and a
// 0.6 V step gives about 20 ke-). The preamp turns charge into voltage with
// a conversion gain of 58.5 uV/e- and saturates at 8000 e-.
// Comparators: while BxCLK_ANA = 0 they auto-zero and output 0; the rising
// edge of BxCLK_ANA starts a sampling phase in which only charge injected
// since that edge counts (the comparator input is AC coupled and was zeroed).
// While BxCLK_ANA = 1, bit i is 1 when the preamp step reaches vth_i, so
// with vth0 < vth1 < vth2 the three bits form a thermometer code.
// The injection network, gain, saturation, threshold names and the two clock
// phases follow the paper. Noise, threshold dispersion, the leakage
// compensation loop, the sampling-switch charge error and the difference
// between the two superpixel variants are left out: this is an ideal model
// meant to drive the digital logic in simulation.
//
// Interface: pixInTest (V), vth0..vth2 (V, referred to the preamp output
// step), bxclk_ana, config_pix[1:0], adc_out[2:0] (bit 0 = vth0).
// Timing: no delays; adc_out changes with the injection step and falls to 0
// at the falling edge of BxCLK_ANA.
// The model updates its state with blocking assignments on purpose: it is
// event-driven analog behaviour, not clocked logic (a lint note about this
// stands).
module pixel_afe #(
  parameter real C0_FF        = 1.85,
  parameter real CVG_UV_PER_E = 58.5,
  parameter real Q_SAT_E      = 8000.0
) (
  input  real        pixInTest,
  input  real        vth0,
  input  real        vth1,
  input  real        vth2,
  input  logic       bxclk_ana,
  input  logic [1:0] config_pix,
  output logic [2:0] adc_out
);
  localparam real QE = 1.602176634e-19;

  real q_int;    // electrons integrated in the current sampling phase
  real last_v;   // previous pixInTest level
  real v_pre;    // preamp output step seen by the comparators (V)

  initial begin
    q_int  = 0.0;
    last_v = 0.0;
  end

  // Auto-zero ends at the rising edge: the comparators forget earlier charge.
  always @(posedge bxclk_ana) q_int = 0.0;

  always @(pixInTest) begin
    if (bxclk_ana && (pixInTest < last_v))
      q_int = q_int + (last_v - pixInTest)
                    * (real'(config_pix[0]) + 2.0 * real'(config_pix[1]))
                    * C0_FF * 1.0e-15 / QE;
    last_v = pixInTest;
  end

  assign v_pre = ((q_int > Q_SAT_E) ? Q_SAT_E : q_int) * CVG_UV_PER_E * 1.0e-6;

  assign adc_out[0] = bxclk_ana && (v_pre >= vth0);
  assign adc_out[1] = bxclk_ana && (v_pre >= vth1);
  assign adc_out[2] = bxclk_ana && (v_pre >= vth2);
endmodule
