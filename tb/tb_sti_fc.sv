// tb_sti_fc: self-checking test of the fully connected output layer.
// Loads random class weights, streams frames of a 2x2x8 spike map (some vectors
// all-zero, one frame entirely silent) and compares the class potentials and the
// winning class (lowest index on a tie) with sums computed here. Also checks the
// cycle count: one cycle per zero vector, C cycles per non-zero vector.
module tb_sti_fc;
  import sti_pkg::*;
  localparam int C = 8, H = 2, W = 2, NCLS = 4, NIN = H * W * C;
  logic clk = 0, rst_n = 0;
  logic w_we, in_valid, in_ready, res_valid;
  logic [4:0] w_addr;
  logic [NCLS*8-1:0] w_data;
  logic [C-1:0] in_sv;
  acc_t score [NCLS];
  logic [1:0] cls;
  int checks = 0, failures = 0;

  sti_fc #(.C(C), .H(H), .W(W), .NCLS(NCLS)) dut (.*);

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

  int wt [NIN][NCLS];
  localparam int NF = 8;
  logic [C-1:0] img [NF][H*W];
  int exp_s [NF][NCLS];
  int exp_c [NF];
  int exp_cyc [NF];

  initial begin
    for (int n = 0; n < NIN; n++) for (int j = 0; j < NCLS; j++) wt[n][j] = int'($urandom_range(0, 60)) - 30;
    for (int f = 0; f < NF; f++) begin
      exp_cyc[f] = 0;
      for (int p = 0; p < H * W; p++) begin
        img[f][p] = (f == 2 || $urandom_range(0, 2) == 0) ? '0 : C'($urandom);
        exp_cyc[f] += (img[f][p] == '0) ? 1 : C + 1;
      end
      exp_c[f] = 0;
      for (int j = 0; j < NCLS; j++) begin
        exp_s[f][j] = 0;
        for (int p = 0; p < H * W; p++) for (int ch = 0; ch < C; ch++)
          if (img[f][p][ch]) exp_s[f][j] += wt[p * C + ch][j];
        if (exp_s[f][j] > exp_s[f][exp_c[f]]) exp_c[f] = j;
      end
    end
  end

  initial begin
    int t0;
    w_we = 0; w_addr = 0; w_data = 0; in_valid = 0; in_sv = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < NIN; n++) begin
      @(negedge clk);
      w_we = 1; w_addr = 5'(n);
      for (int j = 0; j < NCLS; j++) w_data[j*8 +: 8] = 8'(wt[n][j]);
    end
    @(negedge clk); w_we = 0;
    for (int f = 0; f < NF; f++) begin
      int cyc;
      cyc = 0;
      for (int p = 0; p < H * W; p++) begin
        in_valid = 1; in_sv = img[f][p];
        @(posedge clk); cyc++;
        while (!in_ready) begin @(posedge clk); cyc++; end
        @(negedge clk);
      end
      in_valid = 0;
      // the result follows the last vector's scan by two cycles
      while (!res_valid) begin @(posedge clk); cyc++; end
      @(negedge clk);
      check(cls == 2'(exp_c[f]), $sformatf("frame %0d class %0d vs %0d", f, cls, exp_c[f]));
      for (int j = 0; j < NCLS; j++)
        check(score[j] == acc_t'(exp_s[f][j]), $sformatf("frame %0d score %0d: %0d vs %0d", f, j, score[j], exp_s[f][j]));
      check(cyc <= exp_cyc[f] + 3 && cyc >= exp_cyc[f], $sformatf("frame %0d took %0d cycles, expected %0d", f, cyc, exp_cyc[f]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
