// plam_log_adder: the logarithm-approximate core of PLAM.
//
// In the log domain a positive posit is log2(X) = 2^ES*K + E + log2(1+F),
// and Mitchell's approximation log2(1+F) ~ F turns the multiplication of
// two posits into an addition of fixed-point numbers. Because 2^ES*K + E is
// just the regime value with the exponent bits appended, the three fields
// {K, E, F} of each operand are concatenated and added with a single adder:
//   - a fraction sum of 1 or more carries into the exponent
//     (E_C = E+1 mod 2^ES, F_C = F-1), and
//   - an exponent sum of 2^ES or more carries into the regime (K_C = K+1),
// exactly as the paper's field equations require, with no multiplier and no
// comparison. The product sign is the XOR of the operand signs.
//
// Interface: operand fields as produced by posit_decoder; result regime
// k_c is one bit wider than an operand regime. f_carry and e_carry report
// the carries out of the fraction and exponent fields (for observation
// only; the datapath does not use them).
// Combinational, no clock. Algorithm and field layout follow the paper;
// the carry flags are this design's addition.
module plam_log_adder
  import plam_pkg::*;
#(
  parameter int unsigned N  = 32,
  parameter int unsigned ES = 2,
  localparam int unsigned KW = regime_w(N),
  localparam int unsigned KS = regime_sum_w(N),
  localparam int unsigned FW = frac_w(N, ES),
  localparam int unsigned LW = KS + ES + FW   // log-domain word width
) (
  input  logic                 sign_a,
  input  logic signed [KW-1:0] k_a,
  input  logic        [ES-1:0] e_a,
  input  logic        [FW-1:0] f_a,
  input  logic                 sign_b,
  input  logic signed [KW-1:0] k_b,
  input  logic        [ES-1:0] e_b,
  input  logic        [FW-1:0] f_b,
  output logic                 sign_c,
  output logic signed [KS-1:0] k_c,
  output logic        [ES-1:0] e_c,
  output logic        [FW-1:0] f_c,
  output logic                 f_carry,
  output logic                 e_carry
);

  logic [LW-1:0] log_a, log_b, log_c;

  // Regime sign-extended by one bit, then exponent, then fraction.
  assign log_a = {KS'(k_a), e_a, f_a};
  assign log_b = {KS'(k_b), e_b, f_b};
  assign log_c = log_a + log_b;

  assign sign_c = sign_a ^ sign_b;
  assign {k_c, e_c, f_c} = log_c;

  // Carry out of a field's top bit: majority of the two operand bits and
  // the carry into that bit (recovered as a ^ b ^ sum).
  assign f_carry = (f_a[FW-1] & f_b[FW-1]) |
                   ((f_a[FW-1] ^ f_b[FW-1]) & ~f_c[FW-1]);
  assign e_carry = (e_a[ES-1] & e_b[ES-1]) |
                   ((e_a[ES-1] ^ e_b[ES-1]) & ~e_c[ES-1]);

endmodule
