// tb_sti_event_decoder: self-checking test of the spike-event decoder.
// Builds event lists of sparse random frames here (non-zero vectors plus the
// flagged last pixel), sends them with random gaps, and checks that the dense
// output stream reproduces every frame pixel by pixel under back-pressure.
module tb_sti_event_decoder;
  import sti_pkg::*;
  localparam int C = 8, H = 4, W = 6;
  localparam int EW = ev_w(C, H, W);
  logic clk = 0, rst_n = 0;
  logic ev_valid, ev_ready, out_valid, out_ready;
  logic [EW-1:0] ev_data;
  logic [C-1:0] out_sv;
  int checks = 0, failures = 0;

  sti_event_decoder #(.C(C), .H(H), .W(W)) dut (.*);

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

  localparam int NF = 5;
  logic [C-1:0] img [NF][H][W];
  logic [EW-1:0] evq [$];
  initial begin
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
        logic last;
        img[f][r][c] = ($urandom_range(0, 2) == 0) ? C'($urandom) : '0;
        last = (r == H - 1) && (c == W - 1);
        if (img[f][r][c] != 0 || last) evq.push_back({last, 2'(r), 3'(c), img[f][r][c]});
      end
  end

  initial begin
    ev_valid = 0; ev_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (evq.size() > 0) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      ev_valid = 1; ev_data = evq.pop_front();
      @(posedge clk);
      while (!ev_ready) @(posedge clk);
      @(negedge clk); ev_valid = 0;
    end
  end

  int n = 0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int f, r, c;
    f = n / (H * W); r = (n / W) % H; c = n % W;
    check(out_sv == img[f][r][c], $sformatf("f%0d r%0d c%0d: %h vs %h", f, r, c, out_sv, img[f][r][c]));
    n++;
    if (n == NF * H * W) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
