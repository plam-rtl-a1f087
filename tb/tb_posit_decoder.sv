// tb_posit_decoder: self-checking testbench of posit_decoder.
//
// Two instances: posit<16,1>, decoded for all 65536 words, and the default
// posit<32,2>, decoded for directed words (maxpos, minpos, 1.0, NaR, zero,
// negative values) and random words. Sign, regime value, exponent,
// fraction and the zero/NaR flags are compared with the bit-by-bit
// reference decoder of plam_ref_pkg; a few words are also checked against
// fields worked out by hand. One word is applied per clock cycle; the
// decoder is combinational.
`timescale 1ns/1ps
module tb_posit_decoder;
  import plam_ref_pkg::*;

  localparam int NRAND = 50000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // posit<16,1>
  logic [15:0] x16;
  logic s16, z16, n16;
  logic signed [4:0] k16;
  logic [0:0] e16;
  logic [11:0] f16;
  posit_decoder #(.N(16), .ES(1)) dut16 (
    .x(x16), .sign(s16), .k(k16), .e(e16), .f(f16), .is_zero(z16), .is_nar(n16));

  // posit<32,2> (defaults)
  logic [31:0] x32;
  logic s32, z32, n32;
  logic signed [5:0] k32;
  logic [1:0] e32;
  logic [26:0] f32;
  posit_decoder dut32 (
    .x(x32), .sign(s32), .k(k32), .e(e32), .f(f32), .is_zero(z32), .is_nar(n32));

  task automatic cmp(string tag, logic [31:0] x, fields_t d, bit s, int k,
                     int e, longint f, bit z, bit n);
    checks++;
    if (z !== d.zero || n !== d.nar ||
        (!d.zero && !d.nar &&
         (s !== d.sign || k != d.k || e != d.e || f != d.f))) begin
      failures++;
      if (failures <= 10)
        $display("%s MISMATCH x=%h got s=%0d k=%0d e=%0d f=%h z=%0d n=%0d exp s=%0d k=%0d e=%0d f=%h z=%0d n=%0d",
                 tag, x, s, k, e, f, z, n, d.sign, d.k, d.e, d.f, d.zero, d.nar);
    end
  endtask

  task automatic apply32(logic [31:0] x);
    x32 = x;
    @(posedge clk); #1;
    cmp("p32", x, plam_ref#(32, 2)::decode(x), s32, int'(k32), int'(e32),
        longint'(f32), z32, n32);
  endtask

  task automatic lit32(logic [31:0] x, bit s, int k, int e, longint f);
    apply32(x);
    checks++;
    if (s32 !== s || int'(k32) != k || int'(e32) != e || longint'(f32) != f) begin
      failures++;
      $display("p32 literal MISMATCH x=%h", x);
    end
  endtask

  initial begin
    x16 = '0;
    x32 = '0;
    // Hand-worked fields of posit<32,2>.
    lit32(32'h4000_0000, 0, 0, 0, 0);            // 1.0
    lit32(32'h4C00_0000, 0, 0, 1, 27'h400_0000); // 0 10 01 1.. = 3.0
    lit32(32'h7FFF_FFFF, 0, 30, 0, 0);           // maxpos
    lit32(32'h0000_0001, 0, -30, 0, 0);          // minpos
    lit32(32'h2000_0000, 0, -1, 0, 0);           // 0 01 00 = 1/16
    lit32(32'hC000_0000, 1, 0, 0, 0);            // -1.0
    lit32(32'h7000_0000, 0, 2, 0, 0);            // 0 1110 = 256
    apply32('0);
    apply32(32'h8000_0000);
    apply32(32'h8000_0001);
    apply32(32'hFFFF_FFFF);
    for (int i = 0; i < NRAND; i++) apply32($urandom >> ($urandom % 32));
    for (int i = 0; i < 65536; i++) begin
      x16 = 16'(i);
      @(posedge clk); #1;
      cmp("p16", 32'(x16), plam_ref#(16, 1)::decode(x16), s16, int'(k16),
          int'(e16), longint'(f16), z16, n16);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NRAND + 65536 + 1000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
