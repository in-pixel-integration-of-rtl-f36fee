// pixel_config_reg -- serial configuration chain of the pixel matrix.
//
// Every pixel owns two flip-flops, configPix[0] and configPix[1], that switch
// its injection capacitors C0 and 2xC0 onto the global pixInTest line, so a
// pixel can receive 0, 1, 2 or 3 units of test charge. All flip-flops form
// one shift register fed by configIn: configIn -> pixel 0 bit 0 -> pixel 0
// bit 1 -> pixel 1 bit 0 -> ... -> pixel N_PIX-1 bit 1 -> config_out.
// The per-pixel pair follows the paper's pixel schematic; the order across
// pixels, and using configLoad as a shift enable of configClk (the paper
// combines the two into the flip-flop clock), are this design's choices.
//
// Interface: config_clk, config_load (shift enable), config_in (serial in),
// config_out (serial out, to continue the chain), config_pix[p] per pixel.
// Timing: one bit per rising config_clk edge with config_load = 1; after
// N_PIX*CFG_BITS edges the first bit sent sits in pixel N_PIX-1 bit 1.
module pixel_config_reg #(
  parameter int unsigned N_PIX    = smartpix_pkg::N_PIX,
  parameter int unsigned CFG_BITS = smartpix_pkg::CFG_BITS
) (
  input  logic                config_clk,
  input  logic                config_load,
  input  logic                config_in,
  output logic                config_out,
  output logic [CFG_BITS-1:0] config_pix [N_PIX]
);
  localparam int unsigned LEN = N_PIX * CFG_BITS;

  logic [LEN-1:0] sr;  // sr[0] is pixel 0 bit 0

  always_ff @(posedge config_clk) begin
    if (config_load) sr <= {sr[LEN-2:0], config_in};
  end

  assign config_out = sr[LEN-1];

  always_comb begin
    for (int p = 0; p < N_PIX; p++)
      config_pix[p] = sr[p*CFG_BITS +: CFG_BITS];
  end
endmodule
