// adc_latch -- level-sensitive latches that hold one pixel's comparator bits.
//
// The paper states that each pixel's ADC data is latched before it is
// encoded and before it can be loaded into the scan chain, and draws one
// latch per comparator. It does not print the latch enable. Here the latches
// are transparent while the event clock BxCLK_ANA is high (the ADC's sampling
// phase) and hold while it is low (the auto-zero phase, in which the
// comparators are reset). The classifier and the scan chain therefore see a
// stable code from the end of one sampling phase to the start of the next.
//
// Interface: en (BxCLK_ANA), d[W-1:0] comparator bits, q[W-1:0] held bits.
// Timing: q follows d while en = 1 and keeps its value while en = 0.
// The latch inferred here is intended, so a tool note about a latch (or,
// from some linters, about not finding one in always_latch) stands.
module adc_latch #(
  parameter int unsigned W = 3
) (
  input  logic         en,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  always_latch begin
    if (en) q = d;
  end
endmodule
