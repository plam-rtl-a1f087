// tb_plam_formats: checks the PLAM multiplier at the other posit formats it
// is meant to be built for.
//
// posit<16,2> (the 16-bit hardware configuration) and posit<16,1> (the
// format of the network experiments) get random operand pairs; the small
// formats posit<8,1> and posit<8,2> are checked exhaustively over all 65536
// operand pairs. Every product is compared bit
// for bit with the reference model of plam_ref_pkg. All four instances are
// driven in the same clock cycle and checked one cycle later; the
// multiplier is combinational.
`timescale 1ns/1ps
module tb_plam_formats;
  import plam_ref_pkg::*;

  localparam int NRAND = 100000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] a162, b162, p162, a161, b161, p161;
  logic [7:0]  a82, b82, p82, a81, b81, p81;

  plam_mult #(.N(16), .ES(2)) dut162 (.a(a162), .b(b162), .p(p162));
  plam_mult #(.N(16), .ES(1)) dut161 (.a(a161), .b(b161), .p(p161));
  plam_mult #(.N(8),  .ES(2)) dut82  (.a(a82),  .b(b82),  .p(p82));
  plam_mult #(.N(8),  .ES(1)) dut81  (.a(a81),  .b(b81),  .p(p81));

  task automatic chk(string tag, logic [15:0] x, logic [15:0] y,
                     logic [15:0] got, logic [15:0] expected);
    checks++;
    if (got !== expected) begin
      failures++;
      if (failures <= 10)
        $display("%s MISMATCH a=%h b=%h p=%h expected=%h", tag, x, y, got, expected);
    end
  endtask

  initial begin
    bit fc, ec, ru, sx, sn;
    for (int i = 0; i < 65536; i++) begin
      a82 = 8'(i >> 8); b82 = 8'(i);
      a81 = 8'(i >> 8); b81 = 8'(i);
      a162 = 16'($urandom >> ($urandom % 16)); b162 = 16'($urandom);
      a161 = 16'($urandom);                    b161 = 16'($urandom >> ($urandom % 16));
      @(posedge clk); #1;
      chk("p<8,2>", 16'(a82), 16'(b82), 16'(p82),
          16'(plam_ref#(8, 2)::mult(a82, b82, fc, ec, ru, sx, sn)));
      chk("p<8,1>", 16'(a81), 16'(b81), 16'(p81),
          16'(plam_ref#(8, 1)::mult(a81, b81, fc, ec, ru, sx, sn)));
      chk("p<16,2>", a162, b162, p162, plam_ref#(16, 2)::mult(a162, b162, fc, ec, ru, sx, sn));
      chk("p<16,1>", a161, b161, p161, plam_ref#(16, 1)::mult(a161, b161, fc, ec, ru, sx, sn));
    end
    for (int i = 0; i < NRAND; i++) begin
      a162 = 16'($urandom); b162 = 16'($urandom);
      a161 = 16'($urandom); b161 = 16'($urandom);
      @(posedge clk); #1;
      chk("p<16,2>", a162, b162, p162, plam_ref#(16, 2)::mult(a162, b162, fc, ec, ru, sx, sn));
      chk("p<16,1>", a161, b161, p161, plam_ref#(16, 1)::mult(a161, b161, fc, ec, ru, sx, sn));
    end
    // Hand-worked: posit<16,1> 1.5 x 1.5 = 2.0 (0x5000), posit<8,2> 1 x 1.
    a161 = 16'h4800; b161 = 16'h4800; a82 = 8'h40; b82 = 8'h40;
    @(posedge clk); #1;
    chk("p<16,1> literal", a161, b161, p161, 16'h5000);
    chk("p<8,2> literal", 16'(a82), 16'(b82), 16'(p82), 16'h0040);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (65536 + NRAND + 1000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
