// conv_case: one test case for sti_conv_layer, used by tb_sti_conv_layer.
// Loads random int8 weights through the write port (bank p holds output channels
// p, p+P, ...; word byte kh*K+kw), streams NF random sparse frames with random
// gaps and output back-pressure, and compares every output spike vector with an
// integrate-and-fire convolution computed here. It also measures the interval
// between output pixels while input is always available and checks it against
// (CO/P)*CI cycles (CO/P in depthwise mode) plus a small drain.
module conv_case
  import sti_pkg::*;
#(
  parameter int CI = 8, CO = 8, HI = 6, WI = 6, K = 3, P = 2,
  parameter conv_mode_e MODE = MODE_STD,
  parameter int VTH = 40, NF = 2, SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   fired,
  output int   silent,
  output bit   done
);
  localparam int HO = HI - K + 1, WO = WI - K + 1, NG = CO / P;
  localparam int DEPTH = (MODE == MODE_DW) ? NG : NG * CI;
  localparam int AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);
  localparam int BW = (P <= 2) ? 1 : $clog2(P);
  localparam int PIX_CYC = (MODE == MODE_DW) ? NG : NG * CI;

  logic w_we;
  logic [BW-1:0] w_bank;
  logic [AW-1:0] w_addr;
  logic [K*K*8-1:0] w_data;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  logic [CI-1:0] in_sv;
  logic [CO-1:0] out_sv;

  sti_conv_layer #(.CI(CI), .CO(CO), .HI(HI), .WI(WI), .K(K), .P(P), .MODE(MODE)) dut (
    .clk, .rst_n, .vth(acc_t'(VTH)), .w_we, .w_bank, .w_addr, .w_data,
    .in_valid, .in_ready, .in_sv, .out_valid, .out_ready, .out_sv, .busy);

  int wt [CO][CI][K][K];
  logic [CI-1:0] img [NF][HI][WI];
  logic [CO-1:0] expq [$];
  bit loaded = 0;
  bit free_run = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL conv mode %0d: %s", MODE, what); end
  endtask

  initial begin
    void'($urandom(SEED));
    checks = 0; failures = 0; fired = 0; silent = 0; done = 0;
    for (int co = 0; co < CO; co++) for (int ci = 0; ci < CI; ci++)
      for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
        wt[co][ci][kh][kw] = int'($urandom_range(0, 30)) - 10;
    for (int f = 0; f < NF; f++) for (int r = 0; r < HI; r++) for (int c = 0; c < WI; c++)
      for (int ci = 0; ci < CI; ci++) img[f][r][c][ci] = ($urandom_range(0, 9) < 4);
    for (int f = 0; f < NF; f++) for (int ho = 0; ho < HO; ho++) for (int wo = 0; wo < WO; wo++) begin
      logic [CO-1:0] v;
      for (int co = 0; co < CO; co++) begin
        int s;
        s = 0;
        for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
          if (MODE == MODE_DW) begin
            if (img[f][ho+kh][wo+kw][co]) s += wt[co][0][kh][kw];
          end else begin
            for (int ci = 0; ci < CI; ci++) if (img[f][ho+kh][wo+kw][ci]) s += wt[co][ci][kh][kw];
          end
        v[co] = (s >= VTH);
      end
      expq.push_back(v);
    end
  end

  // weight loading, then frames
  initial begin
    w_we = 0; w_bank = 0; w_addr = 0; w_data = 0; in_valid = 0; in_sv = 0;
    @(posedge rst_n);
    for (int co = 0; co < CO; co++)
      for (int ci = 0; ci < ((MODE == MODE_DW) ? 1 : CI); ci++) begin
        @(negedge clk);
        w_we = 1; w_bank = BW'(co % P);
        w_addr = AW'((MODE == MODE_DW) ? co / P : (co / P) * CI + ci);
        for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
          w_data[(kh*K+kw)*8 +: 8] = 8'(wt[co][ci][kh][kw]);
      end
    @(negedge clk); w_we = 0; loaded = 1;
    for (int f = 0; f < NF; f++) begin
      free_run = (f == NF - 1);
      for (int r = 0; r < HI; r++)
        for (int c = 0; c < WI; c++) begin
          @(negedge clk);
          if (!free_run) while ($urandom_range(0, 3) == 0) @(negedge clk);
          in_valid = 1; in_sv = img[f][r][c];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk); in_valid = 0;
        end
    end
  end

  int n = 0;
  int last_out = -1, cyc = 0, max_gap = 0, min_gap = 1 << 30;
  always @(posedge clk) cyc++;
  always @(negedge clk) out_ready <= free_run ? 1'b1 : ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready && !done) begin
    logic [CO-1:0] e;
    e = expq.pop_front();
    check(out_sv == e, $sformatf("pixel %0d: %h vs %h", n, out_sv, e));
    for (int co = 0; co < CO; co++) if (e[co]) fired++; else silent++;
    // interval between consecutive outputs inside one output row, free-running frame
    if (n > (NF - 1) * HO * WO && n % WO != 0) begin
      int gap;
      gap = cyc - last_out;
      if (gap > max_gap) max_gap = gap;
      if (gap < min_gap) min_gap = gap;
    end
    last_out = cyc;
    n++;
    if (n == NF * HO * WO) begin
      check(min_gap >= PIX_CYC, $sformatf("pixel interval %0d below %0d cycles", min_gap, PIX_CYC));
      check(max_gap <= PIX_CYC + 6, $sformatf("pixel interval %0d above %0d+6 cycles", max_gap, PIX_CYC));
      $display("conv mode %0d: pixel interval %0d..%0d cycles (OS loop %0d)", MODE, min_gap, max_gap, PIX_CYC);
      done = 1;
    end
  end
endmodule
