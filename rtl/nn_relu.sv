// nn_relu -- rectified linear unit on the hidden layer of the pT filter.
//
// Each signed input is replaced by zero when negative and passed unchanged
// otherwise. The non-negative result needs one bit less than the input, so
// the output is unsigned and IN_W-1 bits wide. The paper places a 58-wide
// ReLU between the two dense layers; not requantising its output is this
// design's choice (the paper gives no activation width).
//
// Interface: x[N] signed IN_W bits, y[N] unsigned IN_W-1 bits.
// Timing: combinational.
module nn_relu #(
  parameter int unsigned N    = smartpix_pkg::N_HID,
  parameter int unsigned IN_W = 15
) (
  input  logic signed [IN_W-1:0] x [N],
  output logic        [IN_W-2:0] y [N]
);
  always_comb begin
    for (int n = 0; n < N; n++)
      y[n] = x[n][IN_W-1] ? '0 : x[n][IN_W-2:0];
  end
endmodule
