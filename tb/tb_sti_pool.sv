// tb_sti_pool: self-checking test of 2x2 OR pooling.
// Streams random frames (including an odd-sized map, whose last row and column
// are dropped) with random input gaps and output back-pressure, and compares each
// output vector with the OR of its 2x2 block computed here.
module tb_sti_pool;
  localparam int C = 8, H = 7, W = 9;
  localparam int HO = H / 2, WO = W / 2;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [C-1:0] in_sv, out_sv;
  int checks = 0, failures = 0;

  sti_pool #(.C(C), .H(H), .W(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int NF = 4;
  logic [C-1:0] img [NF][H][W];
  logic [C-1:0] expq [$];

  initial begin
    for (int f = 0; f < NF; f++) begin
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
        img[f][r][c] = ($urandom_range(0, 3) == 0) ? C'($urandom) : '0;
      for (int r = 0; r < HO; r++) for (int c = 0; c < WO; c++)
        expq.push_back(img[f][2*r][2*c] | img[f][2*r][2*c+1] | img[f][2*r+1][2*c] | img[f][2*r+1][2*c+1]);
    end
  end

  // driver
  initial begin
    in_valid = 0; in_sv = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) @(negedge clk);
          in_valid = 1; in_sv = img[f][r][c];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk); in_valid = 0;
        end
  end

  // monitor
  int got = 0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [C-1:0] e;
    e = expq.pop_front();
    check(out_sv == e, $sformatf("pooled vector %0d: %h vs %h", got, out_sv, e));
    got++;
    if (got == NF * HO * WO) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
