// tb_wl_vmobilenet: end-to-end run of the vMobileNet workload (MNIST, 28x28
// 16c3-16dwc3/32c1-32dwc3/64c1-64dwc3/64c1-64dwc3/128c1-fc). It has four
// depthwise-separable blocks. Each block is a depthwise 3x3 stage followed by a
// pointwise 1x1 stage, both with parallel factor 1 (40 PEs). An fc layer of
// 100352 -> 10 follows.
// Two frames stream through the chain of accelerator stages built by wl_net,
// which checks the class potentials, the pipelining mechanisms and the frame
// interval. Watchdog: 40000000 cycles.
module tb_wl_vmobilenet;
  logic clk = 0, rst_n = 0;
  int checks, failures;
  bit done;

  always #5 clk = ~clk;

  wl_net #(.NET(1), .NF(2), .SEED(11)) net (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
