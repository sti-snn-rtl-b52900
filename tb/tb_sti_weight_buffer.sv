// tb_sti_weight_buffer: self-checking test of the banked weight buffer.
// Writes random words to every bank and address, then reads them back in random
// order and checks every bank's word one cycle after the read.
module tb_sti_weight_buffer;
  localparam int P = 4, DEPTH = 32, WORD_W = 72;
  logic clk = 0, we, rd_en;
  logic [1:0] wbank;
  logic [4:0] waddr, raddr;
  logic [WORD_W-1:0] wdata;
  logic [WORD_W-1:0] rdata [P];
  int checks = 0, failures = 0;

  sti_weight_buffer #(.P(P), .DEPTH(DEPTH), .WORD_W(WORD_W)) dut (.*);

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

  logic [WORD_W-1:0] ref_m [P][DEPTH];
  initial begin
    we = 0; rd_en = 0; wbank = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int p = 0; p < P; p++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        ref_m[p][a] = {$urandom, $urandom, $urandom};
        we = 1; wbank = 2'(p); waddr = 5'(a); wdata = ref_m[p][a];
      end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      rd_en = 1; raddr = 5'(a);
      @(negedge clk);
      rd_en = 0; raddr = 5'($urandom);
      for (int p = 0; p < P; p++) check(rdata[p] == ref_m[p][a], $sformatf("bank %0d addr %0d", p, a));
      @(negedge clk);
      for (int p = 0; p < P; p++) check(rdata[p] == ref_m[p][a], "data held without rd_en");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
