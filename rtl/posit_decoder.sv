// posit_decoder: unpacks one posit<N,ES> word into its fields.
//
// Outputs the sign S, the signed regime value K, the ES-bit exponent E and
// the (N-ES-3)-bit fraction F (hidden bit not included), so that the word's
// value is (-1)^S * 2^(2^ES*K + E) * (1 + F/2^(N-ES-3)).
//
// How it works: a negative word is first replaced by its two's complement,
// so the remaining fields are always read from a positive word. The first
// bit after the sign gives the regime polarity r; the bits below it are
// inverted when r = 1, so the regime run becomes a run of zeros whose
// length m one leading-zero counter measures. K = m-1 for a run of ones and
// K = -m for a run of zeros. The word is then shifted left past the run and
// its terminating bit; the next ES bits are E and the rest F, with the
// exponent and fraction bits that do not fit in the word read as zeros.
// The all-zero word flags `is_zero` and the word 100...0 flags `is_nar`
// (Not-a-Real); for these two the other outputs carry no meaning.
//
// Combinational, no clock. The field layout and the regime formula follow
// the paper; the complement-then-count structure is this design's own
// choice (the paper names leading-zero detection with inverted regimes as
// the known technique).
module posit_decoder
  import plam_pkg::*;
#(
  parameter int unsigned N  = 32,
  parameter int unsigned ES = 2,
  localparam int unsigned KW = regime_w(N),
  localparam int unsigned FW = frac_w(N, ES),
  localparam int unsigned CW = count_w(N)
) (
  input  logic                 [N-1:0]  x,
  output logic                          sign,
  output logic signed          [KW-1:0] k,
  output logic                 [ES-1:0] e,
  output logic                 [FW-1:0] f,
  output logic                          is_zero,
  output logic                          is_nar
);

  logic [N-1:0]  mag;        // |x| in two's complement
  logic          r;          // regime polarity
  logic [N-2:0]  folded;     // body with a run of ones folded into zeros
  logic [CW-1:0] run;        // regime run length m (1..N-1)
  logic [ES+FW-1:0] ef;      // body with regime and its terminator removed

  assign sign    = x[N-1];
  assign is_zero = (x == '0);
  assign is_nar  = (x == {1'b1, {(N-1){1'b0}}});

  assign mag    = sign ? (~x + N'(1)) : x;
  assign r      = mag[N-2];
  assign folded = r ? ~mag[N-2:0] : mag[N-2:0];

  posit_lzc #(.W(N - 1), .CW(CW)) u_lzc (
    .in_bits  (folded),
    .count    (run)
  );

  always_comb begin
    if (r) k = KW'(run) - KW'(1);
    else   k = -KW'(run);
    // Shifting by run+1 (up to N) drops the run and its terminating bit;
    // bits past the end of the word shift in as zeros. The N-1 bit body
    // then holds E and F in its top ES+FW = N-3 bits.
    ef = (ES+FW)'((mag[N-2:0] << (32'(run) + 1)) >> 2);
  end

  assign e = ef[ES+FW-1 -: ES];
  assign f = ef[FW-1:0];

endmodule
