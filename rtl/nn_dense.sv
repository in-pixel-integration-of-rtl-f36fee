// nn_dense -- one fully parallel dense (fully connected) layer, y = W x + b.
//
// Every output neuron o has N_I multipliers and an adder chain that computes
// b[o] + sum_i w[o][i] * x[i], all in combinational logic with no clock, in
// line with the paper's fully parallel, zero-latency network. Inputs are
// unsigned (the 6-bit y-profile for layer 1, the ReLU outputs for layer 2),
// weights and biases are signed two's complement, and the accumulator keeps
// full precision: ACC_W = IN_W + W_W + clog2(N_I) + 1 bits cannot overflow
// for any input. The bias is added at the accumulator's LSB. The layer sizes
// (16x58, 58x3) come from the paper; the weight and bias widths and the
// fixed-point scaling are this design's choice, since the paper only says
// the model was quantised with QKeras.
//
// Interface: x[N_I] unsigned IN_W bits, w[N_O][N_I] signed W_W bits,
// b[N_O] signed B_W bits, y[N_O] signed ACC_W bits.
// Timing: combinational.
module nn_dense #(
  parameter int unsigned N_I   = smartpix_pkg::N_IN,
  parameter int unsigned N_O   = smartpix_pkg::N_HID,
  parameter int unsigned IN_W  = smartpix_pkg::SUM_W,
  parameter int unsigned W_W   = smartpix_pkg::W_W,
  parameter int unsigned B_W   = smartpix_pkg::B_W,
  parameter int unsigned ACC_W = IN_W + W_W + $clog2(N_I) + 1
) (
  input  logic        [IN_W-1:0]  x [N_I],
  input  logic signed [W_W-1:0]   w [N_O][N_I],
  input  logic signed [B_W-1:0]   b [N_O],
  output logic signed [ACC_W-1:0] y [N_O]
);
  initial begin
    assert (B_W <= ACC_W) else $error("nn_dense: bias wider than accumulator");
  end

  always_comb begin
    for (int o = 0; o < N_O; o++) begin
      logic signed [ACC_W-1:0] acc;
      acc = ACC_W'(b[o]);
      for (int i = 0; i < N_I; i++)
        acc = acc + signed'(ACC_W'(x[i])) * ACC_W'(w[o][i]);
      y[o] = acc;
    end
  end
endmodule
