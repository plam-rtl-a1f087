// posit_encoder: packs sign, regime, exponent and fraction into a
// posit<N,ES> word with round-to-nearest-even.
//
// How it works: the regime value K sets the run length rl (K+1 ones for
// K >= 0, -K zeros for K < 0). The word {~r, E, F, 0...0} is shifted right
// by rl with the run bit r filling from the top, which places the run, its
// terminating bit, the exponent and the fraction in one vector. Its top
// N-1 bits are the unsigned posit body; the next bit is the guard bit and
// the OR of the rest the sticky bit. The body is rounded up when
// guard & (lsb | sticky), i.e. round to nearest, ties to even, on the bit
// string. A regime beyond +-(N-2) saturates the body to maxpos (all ones)
// or minpos (0...01): a posit product never rounds to zero or to NaR.
// Finally a negative result is two's-complemented. `is_nar` forces
// 100...0 and `is_zero` forces 0.
//
// Interface: k is the signed regime of a product (one bit wider than an
// operand regime). round_up, sat_max and sat_min report what the encoder
// did, for observation only. Combinational, no clock.
// The paper states that its PLAM unit rounds correctly and that posits use
// round-to-nearest-even only; the shifter-based structure and the
// saturation rule (taken from the posit standard) are this design's own.
module posit_encoder
  import plam_pkg::*;
#(
  parameter int unsigned N  = 32,
  parameter int unsigned ES = 2,
  localparam int unsigned KS = regime_sum_w(N),
  localparam int unsigned FW = frac_w(N, ES),
  localparam int unsigned CW = count_w(N),
  localparam int unsigned VW = (N - 1) + 1 + ES + FW   // shifter width
) (
  input  logic                 sign,
  input  logic signed [KS-1:0] k,
  input  logic        [ES-1:0] e,
  input  logic        [FW-1:0] f,
  input  logic                 is_zero,
  input  logic                 is_nar,
  output logic        [N-1:0]  p,
  output logic                 round_up,
  output logic                 sat_max,
  output logic                 sat_min
);

  localparam logic signed [KS-1:0] KMAX = KS'(N - 2);
  localparam logic signed [KS-1:0] KMIN = -KS'(N - 2);

  logic          r;
  logic [CW-1:0] rl;
  logic [VW-1:0] v, v_sh, fill;
  logic [N-2:0]  body, body_rnd;
  logic          guard, sticky;

  assign sat_max = (k > KMAX);
  assign sat_min = (k < KMIN);
  assign r       = ~k[KS-1];

  always_comb begin
    // Run length, only meaningful inside the clamped range (1..N-1).
    if (r) rl = CW'(k) + CW'(1);
    else   rl = CW'(-k);
    v      = {~r, e, f, {(N-1){1'b0}}};
    fill   = r ? ~({VW{1'b1}} >> rl) : '0;
    v_sh   = (v >> rl) | fill;
  end

  assign body   = v_sh[VW-1 -: N-1];
  assign guard  = v_sh[VW-N];
  assign sticky = |v_sh[VW-N-1:0];

  always_comb begin
    round_up = 1'b0;
    if (sat_max)      body_rnd = {(N-1){1'b1}};
    else if (sat_min) body_rnd = (N-1)'(1);
    else begin
      round_up = guard & (body[0] | sticky);
      body_rnd = body + (N-1)'(round_up);
    end
  end

  always_comb begin
    if (is_nar)       p = {1'b1, {(N-1){1'b0}}};
    else if (is_zero) p = '0;
    else if (sign)    p = ~{1'b0, body_rnd} + N'(1);
    else              p = {1'b0, body_rnd};
  end

endmodule
