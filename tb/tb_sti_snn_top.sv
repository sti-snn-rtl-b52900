// tb_sti_snn_top: end-to-end test of the accelerator at reduced channel counts
// (4 input channels, 8 channels in every conv stage, parallel factors 4,2,2,1),
// with the SCNN5 spatial chain unchanged. Three frames stream through the
// pipeline back to back; top_driver checks every classification result against
// the reference model and that back-pressure, layer overlap and event
// compression all occurred.
module tb_sti_snn_top;
  import sti_pkg::*;
  localparam int IN_C = 4, NCLS = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_we, ev_in_valid, ev_in_ready, res_valid, busy;
  logic [3:0] host_sel, layer_busy;
  logic [1:0] host_bank;
  logic [19:0] host_addr;
  logic [79:0] host_data;
  logic [1+5+5+IN_C-1:0] ev_in_data;
  acc_t score [NCLS];
  logic [3:0] cls;
  logic [15:0] frames_in, frames_out;
  int checks, failures;
  bit done;

  sti_snn_top #(.IN_C(IN_C), .C1(8), .C2(8), .C3(8), .C4(8), .P1(4), .P2(2), .P3(2), .P4(1))
    dut (.*);
  top_driver #(.IN_C(IN_C), .C1(8), .C2(8), .C3(8), .C4(8), .P1(4), .P2(2), .P3(2), .P4(1),
               .NF(3), .SEED(5))
    drv (.*);

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
