// tb_sti_spike_gen: self-checking test of the spike generation stage.
// Random psums of a 3x3 array are summed here and compared with the threshold;
// checks the fired spike, the potential after firing, the one-cycle latency of the
// standard/depthwise path, the zero-latency pointwise bypass and the optional
// stored-potential input.
module tb_sti_spike_gen;
  import sti_pkg::*;
  localparam int NPE = 9;
  logic clk = 0, rst_n = 0;
  conv_mode_e mode;
  acc_t vth, vmem_in, vmem_out;
  logic en_vmem, psum_valid, spike, spike_valid;
  acc_t psum [NPE];
  int checks = 0, failures = 0;
  int fired = 0;

  sti_spike_gen #(.NPE(NPE)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    mode = MODE_STD; vth = 100; en_vmem = 0; vmem_in = 0; psum_valid = 0;
    foreach (psum[i]) psum[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int s, v;
      mode    = (t % 3 == 0) ? MODE_PW : ((t % 3 == 1) ? MODE_DW : MODE_STD);
      en_vmem = (t % 5 == 4) && (mode != MODE_PW);
      vmem_in = acc_t'(int'($urandom_range(0, 80)));
      vth     = acc_t'(int'($urandom_range(1, 150)));
      s = en_vmem ? int'(vmem_in) : 0;
      foreach (psum[i]) begin
        psum[i] = acc_t'(int'($urandom_range(0, 60)) - 20);
        s += int'(psum[i]);
      end
      v = (mode == MODE_PW) ? int'(psum[0]) : s;
      @(negedge clk); psum_valid = 1;
      if (mode == MODE_PW) begin
        #1;
        check(spike_valid, "pointwise compares in the arrival cycle");
        check(spike == (v >= int'(vth)), "pointwise spike");
        check(vmem_out == ((v >= int'(vth)) ? 0 : acc_t'(v)), "pointwise vmem_out");
        @(negedge clk); psum_valid = 0;
      end else begin
        @(negedge clk); psum_valid = 0;
        check(spike_valid, "spike one cycle after psum");
        check(spike == (v >= int'(vth)), $sformatf("spike v=%0d vth=%0d", v, vth));
        check(vmem_out == ((v >= int'(vth)) ? 0 : acc_t'(v)), "vmem_out after firing");
        if (spike) fired++;
      end
      @(negedge clk);
      check(!spike_valid, "spike_valid is a pulse");
    end
    check(fired > 10, "some neurons fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
