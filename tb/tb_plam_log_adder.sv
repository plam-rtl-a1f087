// tb_plam_log_adder: self-checking testbench of plam_log_adder at its
// default size (posit<32,2> fields).
//
// Applies operand fields (sign, regime value K in -30..30, exponent,
// fraction) and compares the result fields with plain integer arithmetic:
// the log-domain value (4*K + E)*2^27 + F of each operand is added and the
// sum split back into K, E and F; the sign must be the XOR of the operand
// signs, and the carry flags must report fraction and exponent overflow.
// Directed cases cover the 0.5 + 0.5 fraction sum, an exponent sum of 4
// and the extreme regimes. One case per clock cycle; the block is
// combinational.
`timescale 1ns/1ps
module tb_plam_log_adder;

  localparam int N  = 32;
  localparam int ES = 2;
  localparam int FW = N - ES - 3;
  localparam int NRAND = 50000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_fc = 0, n_ec = 0;

  logic sa, sb, sc, fcar, ecar;
  logic signed [5:0] ka, kb;
  logic signed [6:0] kc;
  logic [ES-1:0] ea, eb, ec;
  logic [FW-1:0] fa, fb, fc;

  plam_log_adder dut (
    .sign_a(sa), .k_a(ka), .e_a(ea), .f_a(fa),
    .sign_b(sb), .k_b(kb), .e_b(eb), .f_b(fb),
    .sign_c(sc), .k_c(kc), .e_c(ec), .f_c(fc),
    .f_carry(fcar), .e_carry(ecar));

  task automatic apply(bit s_a, int k_a, int e_a, longint f_a,
                       bit s_b, int k_b, int e_b, longint f_b);
    longint la, lb, lc;
    bit xfc, xec;
    sa = s_a; ka = 6'(k_a); ea = ES'(e_a); fa = FW'(f_a);
    sb = s_b; kb = 6'(k_b); eb = ES'(e_b); fb = FW'(f_b);
    @(posedge clk); #1;
    la = (longint'(k_a * 4 + e_a) <<< FW) + f_a;
    lb = (longint'(k_b * 4 + e_b) <<< FW) + f_b;
    lc = la + lb;
    xfc = (f_a + f_b) >= (longint'(1) << FW);
    xec = (e_a + e_b + int'(xfc)) >= 4;
    n_fc += int'(xfc);
    n_ec += int'(xec);
    checks++;
    if (sc !== (s_a ^ s_b) ||
        int'(kc) != int'(lc >>> (FW + ES)) ||
        int'(ec) != int'((lc >>> FW) & 3) ||
        longint'(fc) != (lc & ((longint'(1) << FW) - 1)) ||
        fcar !== xfc || ecar !== xec) begin
      failures++;
      if (failures <= 10)
        $display("MISMATCH k=%0d,%0d e=%0d,%0d f=%h,%h -> k=%0d e=%0d f=%h fc=%0d ec=%0d",
                 k_a, k_b, e_a, e_b, f_a, f_b, kc, ec, fc, fcar, ecar);
    end
  endtask

  initial begin
    // 0.5 + 0.5: fraction carry, E+1, F = 0.
    apply(0, 0, 0, longint'(1) << (FW - 1), 1, 0, 0, longint'(1) << (FW - 1));
    checks++;
    if (fc != 0 || ec != 1 || kc != 0 || !fcar || sc !== 1'b1) begin
      failures++;
      $display("MISMATCH 0.5+0.5 case");
    end
    // Exponent 3 + 1: carry into the regime, K = 1.
    apply(0, 0, 3, 0, 0, 0, 1, 0);
    checks++;
    if (kc != 1 || ec != 0 || !ecar) begin
      failures++;
      $display("MISMATCH exponent carry case");
    end
    apply(0, 30, 3, (longint'(1) << FW) - 1, 0, 30, 3, (longint'(1) << FW) - 1);
    apply(0, -30, 0, 0, 1, -30, 0, 0);
    apply(1, -1, 3, 5, 1, 0, 2, 7);
    for (int i = 0; i < NRAND; i++)
      apply($urandom % 2, int'($urandom % 61) - 30, int'($urandom % 4),
            longint'($urandom % (1 << FW)),
            $urandom % 2, int'($urandom % 61) - 30, int'($urandom % 4),
            longint'($urandom % (1 << FW)));
    checks++;
    if (n_fc == 0 || n_ec == 0) begin
      failures++;
      $display("a carry never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NRAND + 1000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
