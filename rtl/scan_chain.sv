// scan_chain -- test-mode readout register of the raw thermometric pixel bits.
//
// Each comparator bit of each pixel has one scan cell: a two-input mux in
// front of a flip-flop clocked by BxCLK. With ScanLoad = 1 (mux input 1) the
// cell captures its pixel's latched comparator bit; with ScanLoad = 0 (mux
// input 0) it takes the bit of its neighbour, so the chain shifts one place
// toward scanOut per BxCLK rising edge. Bits leave in the order pix0[0],
// pix0[1], pix0[2], pix1[0], ... pix255[2] (as the paper's timing diagram
// labels them); ScanIn enters at the far end, pix255[2]. The cell structure
// follows the paper; Reset_not as an asynchronous active-low clear is this
// design's reading of the timing diagram, which only shows it rising once.
//
// Interface: bxclk, reset_n, scan_load, scan_in, par_in[3p+b] = pixel p bit b,
// scan_out, pix_out (the register contents, pixOut[767:0]).
// Timing: one load edge, then N_PIX*ADC_BITS-1 shift edges bring every bit
// to scan_out; pix0[0] is on scan_out right after the load edge.
module scan_chain #(
  parameter int unsigned N_PIX    = smartpix_pkg::N_PIX,
  parameter int unsigned ADC_BITS = smartpix_pkg::ADC_BITS
) (
  input  logic                      bxclk,
  input  logic                      reset_n,
  input  logic                      scan_load,
  input  logic                      scan_in,
  input  logic [N_PIX*ADC_BITS-1:0] par_in,
  output logic                      scan_out,
  output logic [N_PIX*ADC_BITS-1:0] pix_out
);
  localparam int unsigned LEN = N_PIX * ADC_BITS;

  always_ff @(posedge bxclk or negedge reset_n) begin
    if (!reset_n)       pix_out <= '0;
    else if (scan_load) pix_out <= par_in;
    else                pix_out <= {scan_in, pix_out[LEN-1:1]};
  end

  assign scan_out = pix_out[0];
endmodule
