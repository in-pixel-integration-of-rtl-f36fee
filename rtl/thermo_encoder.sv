// thermo_encoder -- turns the three thermometric comparator bits of one pixel
// into the 2-bit binary pixel code (pixOutBin).
//
// A 2-bit flash ADC has three comparators with rising thresholds, so a clean
// code is 000, 001, 011 or 111, and the binary value is the number of set
// bits (0..3). The encoder counts the set bits, which also gives a defined
// value for a non-thermometric ("bubble") code; the paper does not say how
// bubbles are handled, so that is this design's choice.
//
// Interface: therm[2:0] in (bit 0 = lowest threshold), bin[1:0] out.
// Timing: purely combinational, as the whole readout path after the latches.
module thermo_encoder (
  input  logic [2:0] therm,
  output logic [1:0] bin
);
  always_comb begin
    bin = 2'(therm[0]) + 2'(therm[1]) + 2'(therm[2]);
  end
endmodule
