// tb_sti_pe: self-checking test of one PE.
// Loads random spike vectors, runs accumulations of CI random weights in standard
// mode and per-cycle weights in depthwise mode, and compares psum with a sum
// computed here from the same spikes and weights. Also checks that psum appears
// exactly one cycle after ctrl1 (`last`) and that the accumulator clears.
module tb_sti_pe;
  import sti_pkg::*;
  localparam int CI = 8;
  logic clk = 0, rst_n = 0;
  conv_mode_e mode;
  logic sv_shift, w_valid, last;
  logic [CI-1:0] sv_in, sv_q;
  logic [2:0] index;
  wgt_t weight;
  acc_t psum;
  logic psum_valid;
  int checks = 0, failures = 0;

  sti_pe #(.CI(CI)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    mode = MODE_STD; sv_shift = 0; w_valid = 0; last = 0; sv_in = '0; index = 0; weight = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      logic [CI-1:0] sv;
      int exp_sum;
      sv = CI'($urandom);
      @(negedge clk); sv_shift = 1; sv_in = sv;
      @(negedge clk); sv_shift = 0;
      check(sv_q == sv, "spike vector load");
      mode = (trial % 3 == 2) ? MODE_DW : ((trial % 3 == 1) ? MODE_PW : MODE_STD);
      exp_sum = 0;
      for (int c = 0; c < CI; c++) begin
        int w;
        w = int'($urandom_range(0, 255)) - 128;
        w_valid = 1; index = 3'(c); weight = wgt_t'(w); last = (c == CI - 1);
        if (sv[c]) exp_sum += w;
        @(negedge clk);
        if (mode == MODE_DW) begin
          check(psum_valid, "dw psum_valid every cycle");
          check(psum == acc_t'(sv[c] ? w : 0), $sformatf("dw psum c=%0d", c));
        end else begin
          check(psum_valid == (c == CI - 1), "psum_valid only after ctrl1");
        end
      end
      w_valid = 0; last = 0;
      if (mode != MODE_DW) check(psum == acc_t'(exp_sum), $sformatf("accumulated psum %0d vs %0d", psum, exp_sum));
      @(negedge clk);
      check(!psum_valid, "psum_valid is a single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
