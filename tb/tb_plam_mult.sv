// tb_plam_mult: end-to-end self-checking testbench of the PLAM multiplier at
// its default size (posit<32,2>).
//
// Drives one operand pair per clock cycle: directed pairs (one times one,
// zero, NaR, maxpos/minpos saturation, the 1.5 x 1.5 worst case of
// Mitchell's approximation, signs) and then random pairs, half of them
// drawn near 1.0 where the fraction is wide. Every product is compared bit
// for bit with the behavioural model of plam_ref_pkg. For products whose
// regime is small the real value is also checked against the exact product:
// the relative error must stay within 1/9 (11.1%) plus rounding, and the
// largest error seen is reported. The multiplier is combinational, so the
// product is checked in the same cycle the operands are applied (zero
// latency). Each mechanism (fraction carry into the exponent, exponent
// carry into the regime, round up, saturation to maxpos and to minpos,
// zero, NaR, negative product) is counted and must occur at least once.
`timescale 1ns/1ps
module tb_plam_mult;
  import plam_ref_pkg::*;

  localparam int N  = 32;
  localparam int ES = 2;
  localparam int FW = N - ES - 3;
  localparam int NRAND = 100000;
  typedef plam_ref #(N, ES) ref_t;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] a, b, p;
  int checks = 0, failures = 0;
  int n_fcarry = 0, n_ecarry = 0, n_round = 0, n_smax = 0, n_smin = 0;
  int n_zero = 0, n_nar = 0, n_neg = 0, n_errchk = 0;
  real max_err = 0.0;

  plam_mult dut (.a(a), .b(b), .p(p));

  localparam logic [N-1:0] ONE    = {2'b01, {(N-2){1'b0}}};
  localparam logic [N-1:0] MAXPOS = {1'b0, {(N-1){1'b1}}};
  localparam logic [N-1:0] MINPOS = N'(1);
  localparam logic [N-1:0] NAR    = {1'b1, {(N-1){1'b0}}};

  // A posit close to 1.0 with random exponent and fraction.
  function automatic logic [N-1:0] near_one();
    bit ru, sx, sn;
    int k = ($urandom % 2 == 0) ? 0 : -1;
    longint f = {$urandom, $urandom} & ((longint'(1) << FW) - 1);
    return ref_t::encode(1'($urandom % 2), k, int'($urandom % (1 << ES)), f,
                         ru, sx, sn);
  endfunction

  task automatic apply(logic [N-1:0] va, logic [N-1:0] vb);
    logic [N-1:0] exp_p;
    bit fc, ec, ru, smx, smn;
    real ra, rb, rp, rexact, err;
    fields_t dp;
    a = va;
    b = vb;
    @(posedge clk);
    #1;
    exp_p = ref_t::mult(va, vb, fc, ec, ru, smx, smn);
    checks++;
    if (p !== exp_p) begin
      failures++;
      if (failures <= 10)
        $display("MISMATCH a=%h b=%h p=%h expected=%h", va, vb, p, exp_p);
    end
    n_fcarry += int'(fc);
    n_ecarry += int'(ec);
    n_round  += int'(ru);
    n_smax   += int'(smx);
    n_smin   += int'(smn);
    if (exp_p == NAR) n_nar++;
    else if (exp_p == '0) n_zero++;
    else if (exp_p[N-1]) n_neg++;
    // Error bound against the exact product, where rounding is fine.
    dp = ref_t::decode(p);
    if (!dp.zero && !dp.nar && dp.k >= -1 && dp.k <= 0 && !smx && !smn) begin
      ra = ref_t::to_real(va);
      rb = ref_t::to_real(vb);
      rp = ref_t::to_real(p);
      rexact = ra * rb;
      err = (rexact - rp) / rexact;
      n_errchk++;
      checks++;
      if (err > 1.0 / 9.0 + 1.0e-6 || err < -1.0e-6) begin
        failures++;
        $display("ERROR BOUND a=%h b=%h p=%h rel_err=%f", va, vb, p, err);
      end
      if (err > max_err) max_err = err;
    end
  endtask

  // Product worked out by hand.
  task automatic apply_lit(logic [N-1:0] va, logic [N-1:0] vb,
                           logic [N-1:0] expected);
    apply(va, vb);
    checks++;
    if (p !== expected) begin
      failures++;
      $display("MISMATCH (literal) a=%h b=%h p=%h expected=%h", va, vb, p, expected);
    end
  endtask

  initial begin
    a = '0;
    b = '0;
    // Directed pairs.
    apply(ONE, ONE);
    apply(ONE, MAXPOS);
    apply(ONE, MINPOS);
    apply('0, ONE);
    apply(ONE, '0);
    apply(NAR, ONE);
    apply(NAR, '0);
    apply('0, NAR);
    apply(MAXPOS, MAXPOS);
    apply(MINPOS, MINPOS);
    apply(MAXPOS, MINPOS);
    apply(-MAXPOS, MAXPOS);
    apply(-MINPOS, -MINPOS);
    // 1.5 x 1.5: both fractions 0.5, the worst case (2.0 instead of 2.25).
    apply({3'b010, 2'b00, 1'b1, {(N-6){1'b0}}},
          {3'b010, 2'b00, 1'b1, {(N-6){1'b0}}});
    apply(-ONE, ONE);
    apply(-ONE, -ONE);
    // Exponent 3 + exponent 1: carry into the regime.
    apply({3'b010, 2'b11, {(N-5){1'b0}}}, {3'b010, 2'b01, {(N-5){1'b0}}});
    // Hand-worked products: 1 x 1 = 1 (0x40000000); 1.5 x 1.5 gives 2.0
    // (0x48000000: regime 10, exponent 01); 2 x 2 = 4 (0x50000000).
    apply_lit(32'h4000_0000, 32'h4000_0000, 32'h4000_0000);
    apply_lit(32'h4400_0000, 32'h4400_0000, 32'h4800_0000);
    apply_lit(32'h4800_0000, 32'h4800_0000, 32'h5000_0000);
    apply_lit(32'hC000_0000, 32'h4800_0000, 32'hB800_0000);
    // Random pairs.
    for (int i = 0; i < NRAND; i++) begin
      case (i % 4)
        0: apply($urandom, $urandom);
        1: apply(near_one(), near_one());
        2: apply(near_one(), $urandom);
        default: apply({$urandom} >> ($urandom % N), $urandom);
      endcase
    end
    // Every mechanism must have happened at least once.
    checks++; if (n_fcarry == 0) begin failures++; $display("never: fraction carry"); end
    checks++; if (n_ecarry == 0) begin failures++; $display("never: exponent carry"); end
    checks++; if (n_round  == 0) begin failures++; $display("never: round up"); end
    checks++; if (n_smax   == 0) begin failures++; $display("never: saturate maxpos"); end
    checks++; if (n_smin   == 0) begin failures++; $display("never: saturate minpos"); end
    checks++; if (n_zero   == 0) begin failures++; $display("never: zero"); end
    checks++; if (n_nar    == 0) begin failures++; $display("never: NaR"); end
    checks++; if (n_neg    == 0) begin failures++; $display("never: negative"); end
    checks++; if (max_err < 0.11) begin failures++; $display("worst-case error never reached"); end
    $display("mechanisms: fraction_carry=%0d exponent_carry=%0d round_up=%0d sat_max=%0d sat_min=%0d zero=%0d nar=%0d negative=%0d error_checks=%0d max_rel_error=%f",
             n_fcarry, n_ecarry, n_round, n_smax, n_smin, n_zero, n_nar, n_neg, n_errchk, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    repeat (NRAND + 1000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
