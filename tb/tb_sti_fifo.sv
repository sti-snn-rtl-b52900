// tb_sti_fifo: self-checking test of the inter-layer FIFO.
// Random requests on the input and random responses on the output; every word
// leaving is compared with a reference queue, the fill count is compared every
// cycle, and the test requires that both a full FIFO (request stalled) and an
// empty one occurred.
module tb_sti_fifo;
  localparam int WIDTH = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [2:0] count;
  int checks = 0, failures = 0;
  int stalls = 0, empties = 0;

  sti_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

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

  logic [WIDTH-1:0] q [$];
  int sent = 0, got = 0;
  localparam int N = 400;

  // producer: keeps a request stable until it is answered
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= 0; in_data <= '0;
    end else begin
      if (in_valid && in_ready) begin
        q.push_back(in_data);
        sent++;
        in_valid <= 0;
      end
      if ((!in_valid || in_ready) && sent + (in_valid && in_ready ? 1 : 0) < N &&
          $urandom_range(0, (sent / 100) % 2 == 0 ? 1 : 4) == 0) begin
        in_valid <= 1; in_data <= WIDTH'($urandom);
      end
      if (in_valid && !in_ready) stalls++;
    end
  end

  always @(negedge clk) out_ready <= ((sent / 100) % 2 == 0) ? ($urandom_range(0, 4) == 0) : 1'b1;

  always @(negedge clk) if (rst_n)
    check(32'(count) == q.size(), $sformatf("count %0d vs %0d", count, q.size()));

  always @(posedge clk) if (rst_n) begin
    if (!out_valid) empties++;
    if (out_valid && out_ready) begin
      logic [WIDTH-1:0] e;
      e = q.pop_front();
      check(out_data == e, "data order");
      got++;
      if (got == N) begin
        check(stalls > 0, "full FIFO stalled a request");
        check(empties > 0, "FIFO ran empty");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
  end
endmodule
