// tb_sti_pad: self-checking test of zero padding.
// Streams random H x W frames with random gaps and back-pressure and checks the
// (H+2) x (W+2) output: zero on the border, the input in order inside.
module tb_sti_pad;
  localparam int C = 8, H = 4, W = 5, PAD = 1;
  localparam int HO = H + 2 * PAD, WO = W + 2 * PAD;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [C-1:0] in_sv, out_sv;
  int checks = 0, failures = 0;

  sti_pad #(.C(C), .H(H), .W(W), .PAD(PAD)) dut (.*);

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

  localparam int NF = 3;
  logic [C-1:0] img [NF][H][W];
  initial for (int f = 0; f < NF; f++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
    img[f][r][c] = C'($urandom) | 1;

  initial begin
    in_valid = 0; in_sv = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          while ($urandom_range(0, 2) == 0) @(negedge clk);
          in_valid = 1; in_sv = img[f][r][c];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk); in_valid = 0;
        end
  end

  int n = 0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int f, r, c;
    f = n / (HO * WO); r = (n / WO) % HO; c = n % WO;
    if (r < PAD || r >= H + PAD || c < PAD || c >= W + PAD)
      check(out_sv == '0, $sformatf("border r%0d c%0d", r, c));
    else
      check(out_sv == img[f][r-PAD][c-PAD], $sformatf("interior f%0d r%0d c%0d", f, r, c));
    n++;
    if (n == NF * HO * WO) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
