// tb_sti_control: self-checking test of the control module.
// Issues random host writes and checks the forwarded one-hot write enables and
// registered bank/address/data, threshold registers, the run flag, and the frame
// counters and busy flag.
module tb_sti_control;
  import sti_pkg::*;
  logic clk = 0, rst_n = 0;
  logic host_we, run, in_frame, out_frame, busy;
  logic [3:0] host_sel;
  logic [1:0] host_bank, bank_o;
  logic [19:0] host_addr, addr_o;
  logic [79:0] host_data, data_o;
  logic [4:0] we_o;
  acc_t vth [4];
  logic [15:0] frames_in, frames_out;
  int checks = 0, failures = 0;

  sti_control #(.NT(5), .NL(4), .AW(20), .BW(2), .DATA_W(80)) dut (.*);

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

  int exp_vth [4] = '{1, 1, 1, 1};
  initial begin
    host_we = 0; host_sel = 0; host_bank = 0; host_addr = 0; host_data = 0; in_frame = 0; out_frame = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < 4; l++) check(vth[l] == 1, "threshold reset value");
    check(!run, "not running after reset");
    for (int t = 0; t < 300; t++) begin
      int sel;
      sel = (t % 7 == 6) ? 14 : int'($urandom_range(0, 5));
      host_we = 1; host_sel = 4'(sel); host_bank = 2'($urandom); host_addr = 20'($urandom_range(0, 5));
      host_data = {$urandom, $urandom, $urandom};
      @(negedge clk);
      host_we = 0;
      if (sel < 5) begin
        check(we_o == 5'(1 << sel), $sformatf("write enable for target %0d: %b", sel, we_o));
        check(bank_o == host_bank && addr_o == host_addr && data_o == host_data, "forwarded write");
      end else begin
        check(we_o == '0, "no weight write for other selects");
        if (sel == 14 && host_addr < 4) exp_vth[host_addr] = int'(acc_t'(host_data[23:0]));
      end
      for (int l = 0; l < 4; l++) check(int'(vth[l]) == exp_vth[l], $sformatf("threshold %0d", l));
    end
    host_we = 1; host_sel = 4'hF; host_data = 80'd1;
    @(negedge clk); host_we = 0;
    check(run, "run set");
    for (int t = 0; t < 5; t++) begin in_frame = 1; @(negedge clk); end
    in_frame = 0;
    check(frames_in == 5 && busy, "frames in flight");
    for (int t = 0; t < 5; t++) begin out_frame = 1; @(negedge clk); end
    out_frame = 0;
    check(frames_out == 5 && !busy, "all frames done");
    host_we = 1; host_sel = 4'hF; host_data = 80'd0;
    @(negedge clk); host_we = 0;
    check(!run, "run cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
