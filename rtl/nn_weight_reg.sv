// nn_weight_reg -- programmable storage for the pT filter's weights and biases.
//
// The paper programs the network's weights and biases from the data
// acquisition system but does not describe how. Here they are one long shift
// register that continues the pixel configuration chain (same configClk and
// configLoad), so no extra pins are needed; that arrangement is this design's
// choice. The register image, from bit 0 upward, is: layer-1 weights
// w1[o][i] at ((o*N_IN)+i)*W_W, then the layer-1 biases b1[o], then the
// layer-2 weights w2[o][h], then the layer-2 biases b2[o]. A new bit enters
// at bit 0 and everything moves up, so the image is sent most significant
// bit first.
//
// Interface: clk, load (shift enable), sin, sout, w1, b1, w2, b2.
// Timing: one bit per rising clk edge with load = 1; TOTAL_BITS edges (4896
// with the default sizes) load a full image.
module nn_weight_reg
  import smartpix_pkg::*;
#(
  parameter int unsigned NI = N_IN,
  parameter int unsigned NH = N_HID,
  parameter int unsigned NO = N_OUT
) (
  input  logic                  clk,
  input  logic                  load,
  input  logic                  sin,
  output logic                  sout,
  output logic signed [W_W-1:0] w1 [NH][NI],
  output logic signed [B_W-1:0] b1 [NH],
  output logic signed [W_W-1:0] w2 [NO][NH],
  output logic signed [B_W-1:0] b2 [NO]
);
  localparam int unsigned OFF_B1     = NH * NI * W_W;
  localparam int unsigned OFF_W2     = OFF_B1 + NH * B_W;
  localparam int unsigned OFF_B2     = OFF_W2 + NO * NH * W_W;
  localparam int unsigned TOTAL_BITS = OFF_B2 + NO * B_W;

  logic [TOTAL_BITS-1:0] sr;

  always_ff @(posedge clk) begin
    if (load) sr <= {sr[TOTAL_BITS-2:0], sin};
  end

  assign sout = sr[TOTAL_BITS-1];

  always_comb begin
    for (int o = 0; o < NH; o++) begin
      for (int i = 0; i < NI; i++)
        w1[o][i] = sr[(o*NI + i)*W_W +: W_W];
      b1[o] = sr[OFF_B1 + o*B_W +: B_W];
    end
    for (int o = 0; o < NO; o++) begin
      for (int i = 0; i < NH; i++)
        w2[o][i] = sr[OFF_W2 + (o*NH + i)*W_W +: W_W];
      b2[o] = sr[OFF_B2 + o*B_W +: B_W];
    end
  end
endmodule
