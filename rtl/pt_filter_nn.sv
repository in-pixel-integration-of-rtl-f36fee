// pt_filter_nn -- the on-chip neural network that classifies a cluster's
// y-profile by the transverse momentum (pT) of the particle that made it.
//
// Structure (from the paper): Dense L1 16x58 -> ReLU 58 -> Dense L2 58x3 ->
// argmax, all combinational so that a new class is available in the same
// bunch crossing as the profile. The argmax index is the 2-bit DnnOut code:
// 00 high pT, 01 low pT negative charge, 10 low pT positive charge (11,
// "invalid", is never produced by this logic). Weights and biases come in as
// ports from the programmable weight register. Arithmetic widths follow
// nn_dense: 6-bit unsigned inputs, 4-bit signed weights, 8-bit signed biases,
// a 15-bit hidden accumulator and a 25-bit output accumulator (widths chosen
// here; the paper does not give them).
//
// Interface: y_prof[16] (6-bit), w1[58][16], b1[58], w2[3][58], b2[3],
// dnn_out (2-bit class).
// Timing: combinational.
module pt_filter_nn
  import smartpix_pkg::*;
#(
  parameter int unsigned NI = N_IN,
  parameter int unsigned NH = N_HID,
  parameter int unsigned NO = N_OUT
) (
  input  logic        [SUM_W-1:0] y_prof [NI],
  input  logic signed [W_W-1:0]   w1 [NH][NI],
  input  logic signed [B_W-1:0]   b1 [NH],
  input  logic signed [W_W-1:0]   w2 [NO][NH],
  input  logic signed [B_W-1:0]   b2 [NO],
  output dnn_out_t                dnn_out
);
  localparam int unsigned ACC1_W = SUM_W + W_W + $clog2(NI) + 1;
  localparam int unsigned HID_W  = ACC1_W - 1;
  localparam int unsigned ACC2_W = HID_W + W_W + $clog2(NH) + 1;

  logic signed [ACC1_W-1:0] l1 [NH];
  logic        [HID_W-1:0]  h  [NH];
  logic signed [ACC2_W-1:0] l2 [NO];
  logic [1:0]               cls;

  nn_dense #(.N_I(NI), .N_O(NH), .IN_W(SUM_W), .W_W(W_W), .B_W(B_W), .ACC_W(ACC1_W))
    u_dense1 (.x(y_prof), .w(w1), .b(b1), .y(l1));

  nn_relu #(.N(NH), .IN_W(ACC1_W)) u_relu (.x(l1), .y(h));

  nn_dense #(.N_I(NH), .N_O(NO), .IN_W(HID_W), .W_W(W_W), .B_W(B_W), .ACC_W(ACC2_W))
    u_dense2 (.x(h), .w(w2), .b(b2), .y(l2));

  nn_argmax #(.N(NO), .W(ACC2_W)) u_argmax (.x(l2), .idx(cls));

  assign dnn_out = dnn_out_t'(cls);
endmodule
