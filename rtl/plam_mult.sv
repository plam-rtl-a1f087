// plam_mult: posit<N,ES> logarithm-approximate multiplier (PLAM), top level.
//
// Computes p ~ a * b for two posit<N,ES> words without a fraction
// multiplier. Each operand is unpacked by a posit_decoder; plam_log_adder
// adds the concatenated regime|exponent|fraction fields (Mitchell's
// log2(1+f) ~ f), which yields the product's regime, exponent and fraction
// with all carries already applied; posit_encoder packs and rounds the
// result (round to nearest even). Special values: if either operand is NaR
// the product is NaR, otherwise if either is zero the product is zero.
// Results beyond maxpos/minpos saturate. The relative error against the
// exact product is at most 1/9 (11.1%), reached when both fractions are
// 0.5, plus the final rounding.
//
// Interface: a, b, p are posit<N,ES> words (two's complement for negative
// values). Defaults N=32, ES=2: the paper's 32-bit, es=2 hardware
// configuration; N=16 works the same (the paper also builds 16-bit units
// and uses posit<16,1> for its network experiments). Requires ES >= 1 and
// N-ES-3 >= 1.
// Timing: purely combinational, no pipelining (as in the paper's units), so
// the result is valid in the same cycle as the operands.
module plam_mult
  import plam_pkg::*;
#(
  parameter int unsigned N  = 32,
  parameter int unsigned ES = 2
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] p
);

  localparam int unsigned KW = regime_w(N);
  localparam int unsigned KS = regime_sum_w(N);
  localparam int unsigned FW = frac_w(N, ES);

  logic                 s_a, s_b, s_c;
  logic signed [KW-1:0] k_a, k_b;
  logic signed [KS-1:0] k_c;
  logic        [ES-1:0] e_a, e_b, e_c;
  logic        [FW-1:0] f_a, f_b, f_c;
  logic                 zero_a, zero_b, nar_a, nar_b;
  logic                 res_zero, res_nar;
  logic                 f_carry, e_carry, round_up, sat_max, sat_min;

  posit_decoder #(.N(N), .ES(ES)) u_dec_a (
    .x(a), .sign(s_a), .k(k_a), .e(e_a), .f(f_a),
    .is_zero(zero_a), .is_nar(nar_a)
  );

  posit_decoder #(.N(N), .ES(ES)) u_dec_b (
    .x(b), .sign(s_b), .k(k_b), .e(e_b), .f(f_b),
    .is_zero(zero_b), .is_nar(nar_b)
  );

  plam_log_adder #(.N(N), .ES(ES)) u_add (
    .sign_a(s_a), .k_a(k_a), .e_a(e_a), .f_a(f_a),
    .sign_b(s_b), .k_b(k_b), .e_b(e_b), .f_b(f_b),
    .sign_c(s_c), .k_c(k_c), .e_c(e_c), .f_c(f_c),
    .f_carry(f_carry), .e_carry(e_carry)
  );

  assign res_nar  = nar_a | nar_b;
  assign res_zero = zero_a | zero_b;

  posit_encoder #(.N(N), .ES(ES)) u_enc (
    .sign(s_c), .k(k_c), .e(e_c), .f(f_c),
    .is_zero(res_zero), .is_nar(res_nar),
    .p(p), .round_up(round_up), .sat_max(sat_max), .sat_min(sat_min)
  );

  // The carry and rounding flags are status outputs of the sub-blocks that
  // this top does not export; they are kept for waveform inspection.
  logic unused_flags;
  assign unused_flags = ^{f_carry, e_carry, round_up, sat_max, sat_min};

  initial begin
    assert (ES >= 1 && N >= ES + 4)
      else $error("plam_mult: needs ES >= 1 and N >= ES+4");
  end

endmodule
