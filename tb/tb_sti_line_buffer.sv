// tb_sti_line_buffer: self-checking test of the line buffer.
// Pushes three frames of W x H random vectors, keeping a copy of every pushed
// vector here, and checks that on each push col[k] equals the vector pushed
// (K-1-k) rows earlier, once that many rows exist.
module tb_sti_line_buffer;
  localparam int CI = 8, W = 6, K = 3, H = 5;
  logic clk = 0, rst_n = 0, push;
  logic [CI-1:0] din;
  logic [CI-1:0] col [K];
  int checks = 0, failures = 0;

  sti_line_buffer #(.CI(CI), .W(W), .K(K)) dut (.*);

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

  logic [CI-1:0] img [H][W];
  initial begin
    push = 0; din = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 3; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          img[r][c] = CI'($urandom);
          din = img[r][c]; push = 1;
          #1;
          for (int k = 0; k < K; k++)
            if (r >= K - 1 - k) check(col[k] == img[r-(K-1-k)][c], $sformatf("col[%0d] at r%0d c%0d", k, r, c));
          @(negedge clk); push = 0;
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
