// tb_sti_genspk: self-checking test of the output-spike collector.
// Feeds CO/P groups of P random spike bits (with idle gaps) and checks that the
// vector appears once, with done, after the last group, with bit g*P+p = lane p
// of group g.
module tb_sti_genspk;
  localparam int CO = 16, P = 4;
  logic clk = 0, rst_n = 0, clear, spike_valid, done;
  logic [P-1:0] spike;
  logic [CO-1:0] sv_out;
  int checks = 0, failures = 0;

  sti_genspk #(.CO(CO), .P(P)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    clear = 0; spike_valid = 0; spike = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      logic [CO-1:0] exp_v;
      exp_v = CO'($urandom);
      for (int g = 0; g < CO / P; g++) begin
        @(negedge clk);
        spike = exp_v[g*P +: P]; spike_valid = 1;
        @(negedge clk);
        spike_valid = 0; spike = '1;
        check(done == (g == CO / P - 1), "done only after the last group");
        if (g == CO / P - 1) check(sv_out == exp_v, $sformatf("vector %h vs %h", sv_out, exp_v));
        if (($urandom & 1) != 0) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
