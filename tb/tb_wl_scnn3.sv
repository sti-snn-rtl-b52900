// tb_wl_scnn3: end-to-end run of the SCNN3 workload (MNIST, 28x28
// 16c3-32c3-p2-32c3-p2-fc). The first 16c3 layer encodes the image and runs off
// the accelerator. The chain has two standard conv stages with parallel factors
// 4 and 2 (54 PEs), then an fc layer of 1568 -> 10.
// Two frames stream through the chain of accelerator stages built by wl_net,
// which checks the class potentials, the pipelining mechanisms and the frame
// interval. Watchdog: 3000000 cycles.
module tb_wl_scnn3;
  logic clk = 0, rst_n = 0;
  int checks, failures;
  bit done;

  always #5 clk = ~clk;

  wl_net #(.NET(0), .NF(2), .SEED(11)) net (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
