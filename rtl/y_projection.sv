// y_projection -- projects the cluster in the pixel matrix onto the local
// y axis by summing the 2-bit pixel codes of each of 16 pixel groups.
//
// The 256 pixels are grouped as 16 rows of 16 (pixel p = 16*row + column);
// bus `row` is the sum of that row's 16 codes. The largest sum is 16 x 3 = 48,
// which fits the 6-bit bus exactly. The 16 buses of 6 bits follow the paper;
// the mapping of pixel index to bus is this design's choice, taken from the
// paper's row/column labels (its text calls each array 32 x 8).
//
// Interface: pix_bin[p] (2-bit codes), y_prof[k] (6-bit sums).
// Timing: purely combinational (an adder tree per bus).
module y_projection #(
  parameter int unsigned N_PIX = smartpix_pkg::N_PIX,
  parameter int unsigned N_BUS = smartpix_pkg::N_BUS,
  parameter int unsigned SUM_W = smartpix_pkg::SUM_W
) (
  input  logic [1:0]       pix_bin [N_PIX],
  output logic [SUM_W-1:0] y_prof  [N_BUS]
);
  localparam int unsigned PER_BUS = N_PIX / N_BUS;

  always_comb begin
    for (int k = 0; k < N_BUS; k++) begin
      y_prof[k] = '0;
      for (int j = 0; j < PER_BUS; j++)
        y_prof[k] = y_prof[k] + SUM_W'(pix_bin[k*PER_BUS + j]);
    end
  end
endmodule
