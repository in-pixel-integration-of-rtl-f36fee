// nn_argmax -- index of the largest of N signed scores.
//
// The output layer of the pT filter has three scores (high pT, low pT of
// negative charge, low pT of positive charge); the class is the index of the
// largest. Scores are compared one after the other and a later score wins
// only when strictly larger, so ties go to the lower index (the paper does
// not say how ties are broken).
//
// Interface: x[N] signed W bits, idx (clog2(N) bits).
// Timing: combinational.
module nn_argmax #(
  parameter int unsigned N = smartpix_pkg::N_OUT,
  parameter int unsigned W = 25
) (
  input  logic signed [W-1:0]           x [N],
  output logic [$clog2(N > 1 ? N : 2)-1:0] idx
);
  always_comb begin
    logic signed [W-1:0] best;
    best = x[0];
    idx  = '0;
    for (int n = 1; n < N; n++) begin
      if (x[n] > best) begin
        best = x[n];
        idx  = ($bits(idx))'(n);
      end
    end
  end
endmodule
