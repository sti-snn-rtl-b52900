// tb_sti_conv_layer: self-checking test of the convolution layer in all three PE
// modes: standard 3x3 (8 -> 8 channels, parallel factor 2), depthwise 3x3
// (8 channels, parallel factor 4) and pointwise 1x1 (8 -> 16 channels, parallel
// factor 2). Each case compares every output spike vector with a reference
// integrate-and-fire convolution and checks the per-pixel cycle count.
module tb_sti_conv_layer;
  import sti_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c0, f0, c1, f1, c2, f2, fi0, s0, fi1, s1, fi2, s2;
  bit d0, d1, d2;
  int checks = 0, failures = 0;

  conv_case #(.CI(8), .CO(8), .HI(6), .WI(7), .K(3), .P(2), .MODE(MODE_STD), .VTH(100), .SEED(11))
    u_std (.clk, .rst_n, .checks(c0), .failures(f0), .fired(fi0), .silent(s0), .done(d0));
  conv_case #(.CI(8), .CO(8), .HI(6), .WI(6), .K(3), .P(4), .MODE(MODE_DW), .VTH(8), .SEED(22))
    u_dw (.clk, .rst_n, .checks(c1), .failures(f1), .fired(fi1), .silent(s1), .done(d1));
  conv_case #(.CI(8), .CO(16), .HI(5), .WI(5), .K(1), .P(2), .MODE(MODE_PW), .VTH(6), .SEED(33))
    u_pw (.clk, .rst_n, .checks(c2), .failures(f2), .fired(fi2), .silent(s2), .done(d2));

  task automatic finish_tb(input bit timeout);
    checks = c0 + c1 + c2 + 3; failures = f0 + f1 + f2 + (timeout ? 1 : 0);
    // each mode must produce both firing and silent neurons
    if (!(fi0 > 0 && s0 > 0)) failures++;
    if (!(fi1 > 0 && s1 > 0)) failures++;
    if (!(fi2 > 0 && s2 > 0)) failures++;
    $display("fired/silent: std %0d/%0d dw %0d/%0d pw %0d/%0d", fi0, s0, fi1, s1, fi2, s2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    wait (d0 && d1 && d2);
    repeat (2) @(posedge clk);
    finish_tb(0);
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    finish_tb(1);
  end
endmodule
