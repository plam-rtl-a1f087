// posit_lzc: leading-zero counter over a W-bit vector.
//
// Counts the zeros above the most significant one of `in_bits`; when the
// vector is all zeros the count is W. The posit
// decoder uses it to measure the regime run after folding a run of ones
// into a run of zeros, so a single zero detector serves both regime
// polarities. Purely combinational, written as a priority loop that
// synthesis maps to a priority encoder. The counter itself is this
// design's own choice; the paper only names leading-zero detection as the
// usual way posit units find the regime.
module posit_lzc #(
  parameter int unsigned W  = 31,
  parameter int unsigned CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  in_bits,
  output logic [CW-1:0] count
);

  always_comb begin
    count    = CW'(W);
    for (int i = 0; i < W; i++) begin
      if (in_bits[i]) count = CW'(W - 1 - i);
    end
  end

endmodule
