// tb_sti_event_encoder: self-checking test of the spike-event encoder.
// Streams sparse random frames with back-pressure; the expected event list (every
// non-zero vector plus the frame's last pixel, flagged) is built here and compared
// event by event, including row, column and flag.
module tb_sti_event_encoder;
  import sti_pkg::*;
  localparam int C = 8, H = 4, W = 6;
  localparam int EW = ev_w(C, H, W);
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, ev_valid, ev_ready;
  logic [C-1:0] in_sv;
  logic [EW-1:0] ev_data;
  int checks = 0, failures = 0;

  sti_event_encoder #(.C(C), .H(H), .W(W)) dut (.*);

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
  logic [EW-1:0] expq [$];
  int nexp;
  initial begin
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
        logic last;
        img[f][r][c] = ($urandom_range(0, 2) == 0) ? C'($urandom) : '0;
        last = (r == H - 1) && (c == W - 1);
        if (img[f][r][c] != 0 || last) expq.push_back({last, 2'(r), 3'(c), img[f][r][c]});
      end
    nexp = expq.size();
  end

  initial begin
    in_valid = 0; in_sv = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          in_valid = 1; in_sv = img[f][r][c];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk); in_valid = 0;
        end
  end

  int got = 0;
  always @(negedge clk) ev_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    logic [EW-1:0] e;
    e = expq.pop_front();
    check(ev_data == e, $sformatf("event %0d: %h vs %h", got, ev_data, e));
    got++;
    if (got == nexp) begin
      check(got > NF, "sparse frames produced events");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
