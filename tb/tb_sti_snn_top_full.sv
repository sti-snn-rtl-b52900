// tb_sti_snn_top_full: end-to-end test of the accelerator at its default (SCNN5)
// size: 32x32x64 input spikes, conv stages 64->128->256->256->512 with parallel
// factors 4,4,2,1, fc to 10 classes. Two frames stream through the pipeline;
// top_driver loads all 2.1 MB of weights, checks both classification results
// against the reference model, and checks the frame interval against the
// slowest-stage estimate (about 524k cycles, 2.6 ms at 200 MHz).
module tb_sti_snn_top_full;
  import sti_pkg::*;
  localparam int NCLS = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_we, ev_in_valid, ev_in_ready, res_valid, busy;
  logic [3:0] host_sel, layer_busy;
  logic [1:0] host_bank;
  logic [19:0] host_addr;
  logic [79:0] host_data;
  logic [1+5+5+64-1:0] ev_in_data;
  acc_t score [NCLS];
  logic [3:0] cls;
  logic [15:0] frames_in, frames_out;
  int checks, failures;
  bit done;

  sti_snn_top dut (.*);
  top_driver #(.NF(2), .SEED(9)) drv (.*);

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (4000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
