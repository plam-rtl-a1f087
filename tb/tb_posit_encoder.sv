// tb_posit_encoder: self-checking testbench of posit_encoder at its default
// size (posit<32,2>).
//
// Three kinds of stimulus, one per clock cycle (the encoder is
// combinational):
//  - hand-worked words: 1.0, a round-half-to-even tie that stays, a tie that
//    rounds up, maxpos/minpos saturation, negative values, zero and NaR;
//  - round trips: the fields of a random posit word, decoded by the
//    reference model, must encode back to the same word with no rounding;
//  - random fields (K in -34..34, beyond the representable range), compared
//    with the bit-string reference encoder of plam_ref_pkg, including the
//    round_up / sat_max / sat_min flags.
`timescale 1ns/1ps
module tb_posit_encoder;
  import plam_ref_pkg::*;

  localparam int N  = 32;
  localparam int ES = 2;
  localparam int FW = N - ES - 3;
  localparam int NRAND = 50000;
  typedef plam_ref #(N, ES) ref_t;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_ru = 0, n_smax = 0, n_smin = 0;

  logic sign, zero, nar, ru, smax, smin;
  logic signed [6:0] k;
  logic [ES-1:0] e;
  logic [FW-1:0] f;
  logic [N-1:0] p;

  posit_encoder dut (
    .sign(sign), .k(k), .e(e), .f(f), .is_zero(zero), .is_nar(nar),
    .p(p), .round_up(ru), .sat_max(smax), .sat_min(smin));

  task automatic apply(bit s, int kk, int ee, longint ff, bit z, bit n);
    logic [N-1:0] exp_p;
    bit xru, xsmax, xsmin;
    sign = s; k = 7'(kk); e = ES'(ee); f = FW'(ff); zero = z; nar = n;
    @(posedge clk); #1;
    exp_p = ref_t::encode(s, kk, ee, ff, xru, xsmax, xsmin);
    if (n) begin
      exp_p = ref_t::nar_word(); xru = ru; xsmax = smax; xsmin = smin;
    end else if (z) begin
      exp_p = '0; xru = ru; xsmax = smax; xsmin = smin;
    end
    n_ru += int'(xru); n_smax += int'(xsmax); n_smin += int'(xsmin);
    checks++;
    if (p !== exp_p || ru !== xru || smax !== xsmax || smin !== xsmin) begin
      failures++;
      if (failures <= 10)
        $display("MISMATCH s=%0d k=%0d e=%0d f=%h -> p=%h (exp %h) ru=%0d smax=%0d smin=%0d",
                 s, kk, ee, ff, p, exp_p, ru, smax, smin);
    end
  endtask

  task automatic lit(bit s, int kk, int ee, longint ff, logic [N-1:0] expected);
    apply(s, kk, ee, ff, 0, 0);
    checks++;
    if (p !== expected) begin
      failures++;
      $display("literal MISMATCH k=%0d e=%0d f=%h p=%h expected=%h", kk, ee, ff, p, expected);
    end
  endtask

  initial begin
    lit(0, 0, 0, 0, 32'h4000_0000);         // 1.0
    lit(1, 0, 0, 0, 32'hC000_0000);         // -1.0
    lit(0, 1, 0, 1, 32'h6000_0000);         // tie, lsb even: stays
    lit(0, 1, 0, 3, 32'h6000_0002);         // tie, lsb odd: rounds up
    lit(0, 31, 0, 0, 32'h7FFF_FFFF);        // beyond maxpos
    lit(0, 40, 3, 5, 32'h7FFF_FFFF);
    lit(0, -31, 0, 0, 32'h0000_0001);       // below minpos
    lit(1, -40, 0, 0, 32'hFFFF_FFFF);       // -minpos
    lit(0, 30, 0, 0, 32'h7FFF_FFFF);        // maxpos exactly
    lit(0, -30, 0, 0, 32'h0000_0001);       // minpos exactly
    lit(0, -30, 2, 0, 32'h0000_0002);       // guard set, rounds to even up
    apply(0, 3, 1, 77, 1, 0);               // zero flag
    apply(1, 3, 1, 77, 0, 1);               // NaR flag
    apply(0, 3, 1, 77, 1, 1);               // NaR wins
    // Round trips.
    for (int i = 0; i < NRAND; i++) begin
      logic [N-1:0] x;
      fields_t d;
      x = $urandom >> ($urandom % N);
      if ($urandom % 2 == 1) x = -x;
      d = ref_t::decode(x);
      if (d.zero || d.nar) continue;
      apply(d.sign, d.k, d.e, d.f, 0, 0);
      checks++;
      if (p !== x) begin
        failures++;
        if (failures <= 10) $display("round trip MISMATCH x=%h p=%h", x, p);
      end
    end
    // Random fields.
    for (int i = 0; i < NRAND; i++)
      apply($urandom % 2, int'($urandom % 69) - 34, int'($urandom % 4),
            longint'($urandom % (1 << FW)), 0, 0);
    checks++;
    if (n_ru == 0 || n_smax == 0 || n_smin == 0) begin
      failures++;
      $display("a rounding or saturation case never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * NRAND + 1000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
