// tb_sti_layer: self-checking test of one pipeline stage (decode, pad, conv,
// pool, encode) in three configurations: a standard 3x3 layer with pooling, a
// depthwise 3x3 layer and a pointwise 1x1 layer (the two halves of a depthwise
// separable convolution, as in vMobileNet). Output events are compared with the
// reference model; the test also requires that event encoding dropped pixels.
module tb_sti_layer;
  import sti_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c0, f0, e0, p0, c1, f1, e1, p1, c2, f2, e2, p2;
  bit d0, d1, d2;

  layer_case #(.CI(4), .CO(8), .H(6), .W(6), .PAD(1), .K(3), .P(2), .MODE(MODE_STD), .POOL(1), .SEED(3))
    u_std (.clk, .rst_n, .checks(c0), .failures(f0), .events_out(e0), .pixels_out(p0), .done(d0));
  layer_case #(.CI(8), .CO(8), .H(6), .W(6), .PAD(1), .K(3), .P(4), .MODE(MODE_DW), .POOL(0), .SEED(4))
    u_dw (.clk, .rst_n, .checks(c1), .failures(f1), .events_out(e1), .pixels_out(p1), .done(d1));
  layer_case #(.CI(8), .CO(16), .H(5), .W(5), .PAD(0), .K(1), .P(2), .MODE(MODE_PW), .POOL(0), .SEED(6))
    u_pw (.clk, .rst_n, .checks(c2), .failures(f2), .events_out(e2), .pixels_out(p2), .done(d2));

  task automatic finish_tb(input bit timeout);
    int checks, failures;
    checks = c0 + c1 + c2 + 1;
    failures = f0 + f1 + f2 + (timeout ? 1 : 0);
    if (!(e0 + e1 + e2 < p0 + p1 + p2)) failures++;
    $display("events/pixels: std %0d/%0d dw %0d/%0d pw %0d/%0d", e0, p0, e1, p1, e2, p2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    wait (d0 && d1 && d2);
    finish_tb(0);
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    finish_tb(1);
  end
endmodule
