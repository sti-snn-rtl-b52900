// top_driver: stimulus and checker for sti_snn_top, shared by the reduced-size and
// the full-size end-to-end testbenches (it connects to the accelerator's ports and
// does not instantiate it).
//
// It draws random int8 weights for the four conv layers and the fc layer and NF
// random sparse 32x32xIN_C input spike maps (40% of the pixels active, a
// quarter of their channels spiking), runs them through the reference model
// of snn_ref_pkg (pool, four pad-conv-IF-pool stages, fc), and chooses each layer's
// threshold as the median potential of frame 0 so that about half the neurons
// fire. It then loads weights and thresholds through the host bus, starts the
// accelerator, sends all frames as spike events back to back and compares every
// result (class and all potentials) with the reference. It counts the mechanisms
// the design relies on and fails the test if one never happened: input
// back-pressure (request not answered), two or more layers busy at once
// (layer-wise pipelining), all-zero vectors dropped by the event encoding, and
// the frame interval against the slowest-stage estimate of Eq. (7)/(8).
module top_driver
  import sti_pkg::*;
  import snn_ref_pkg::*;
#(
  parameter int IN_C = 64, C1 = 128, C2 = 256, C3 = 256, C4 = 512,
  parameter int P1 = 4, P2 = 4, P3 = 2, P4 = 1, NCLS = 10,
  parameter int NF = 2, SEED = 7,
  localparam int EW_IN = 1 + 5 + 5 + IN_C,
  localparam int HDW = ((NCLS > 9) ? NCLS : 9) * 8,
  localparam int CLW = (NCLS <= 2) ? 1 : $clog2(NCLS)
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             host_we,
  output logic [3:0]       host_sel,
  output logic [1:0]       host_bank,
  output logic [19:0]      host_addr,
  output logic [HDW-1:0]   host_data,
  output logic             ev_in_valid,
  input  logic             ev_in_ready,
  output logic [EW_IN-1:0] ev_in_data,
  input  logic             res_valid,
  input  acc_t             score [NCLS],
  input  logic [CLW-1:0]   cls,
  input  logic [15:0]      frames_in,
  input  logic [15:0]      frames_out,
  input  logic             busy,
  input  logic [3:0]       layer_busy,
  output int               checks,
  output int               failures,
  output bit               done
);
  localparam int CH [5] = '{IN_C, C1, C2, C3, C4};
  localparam int PF [4] = '{P1, P2, P3, P4};
  localparam int HW [5] = '{16, 8, 4, 2, 1};   // input size of conv stage l (after pooling)

  // Run-time copies of the sizes: loop bounds taken from variables keep the
  // simulator from unrolling the large full-size loops at compile time.
  int ch [5], pf [4], nc;
  initial begin
    for (int l = 0; l < 5; l++) ch[l] = CH[l];
    for (int l = 0; l < 4; l++) pf[l] = PF[l];
    nc = NCLS;
  end

  imap_t wt [4];
  imap_t wfc;
  int    vth [4];
  bmap_t inmap [NF];
  int    exp_score [NF][NCLS];
  int    exp_cls [NF];
  int    stalls = 0, overlap = 0, events = 0, pixels = 0;
  longint cyc = 0;
  longint t_res [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- reference
  initial begin
    #0;
    void'($urandom(SEED));
    checks = 0; failures = 0; done = 0;
    for (int l = 0; l < 4; l++) begin
      wt[l] = new[ch[l+1] * ch[l] * 9];
      foreach (wt[l][i]) wt[l][i] = int'($urandom_range(0, 30)) - 10;
    end
    wfc = new[ch[4] * nc];
    foreach (wfc[i]) wfc[i] = int'($urandom_range(0, 40)) - 20;
    for (int f = 0; f < NF; f++) begin
      inmap[f] = new[32 * 32 * ch[0]];
      // spatially sparse: 40% of the pixels carry spikes, 25% of their channels
      for (int px = 0; px < 32 * 32; px++) begin
        bit act;
        act = ($urandom_range(0, 99) < 40);
        for (int i = 0; i < ch[0]; i++)
          inmap[f][px * ch[0] + i] = act && ($urandom_range(0, 99) < 25);
      end
    end
    for (int f = 0; f < NF; f++) begin
      bmap_t m;
      m = pool2(inmap[f], ch[0], 32, 32);
      for (int l = 0; l < 4; l++) begin
        imap_t v;
        v = conv_pot(m, ch[l], HW[l], HW[l], wt[l], ch[l+1], 3, 1);
        if (f == 0) vth[l] = median(v);
        m = pool2(fire(v, vth[l]), ch[l+1], HW[l], HW[l]);
      end
      exp_cls[f] = 0;
      for (int j = 0; j < nc; j++) begin
        exp_score[f][j] = 0;
        for (int n = 0; n < ch[4]; n++) if (m[n]) exp_score[f][j] += wfc[n * nc + j];
        if (exp_score[f][j] > exp_score[f][exp_cls[f]]) exp_cls[f] = j;
      end
    end
    $display("thresholds %0d %0d %0d %0d", vth[0], vth[1], vth[2], vth[3]);
  end

  // ---------------------------------------------------------------- stimulus
  task automatic host_write(input logic [3:0] sel, input int bank, input int addr,
                            input logic [HDW-1:0] data);
    @(negedge clk);
    host_we = 1; host_sel = sel; host_bank = 2'(bank); host_addr = 20'(addr); host_data = data;
  endtask

  initial begin
    host_we = 0; host_sel = 0; host_bank = 0; host_addr = 0; host_data = 0;
    ev_in_valid = 0; ev_in_data = 0;
    @(posedge rst_n);
    repeat (2) @(posedge clk);
    for (int l = 0; l < 4; l++)
      for (int o = 0; o < ch[l+1]; o++)
        for (int i = 0; i < ch[l]; i++) begin
          logic [HDW-1:0] d;
          d = '0;
          for (int k = 0; k < 9; k++) d[k*8 +: 8] = 8'(wt[l][(o * ch[l] + i) * 9 + k]);
          host_write(4'(l), o % pf[l], (o / pf[l]) * ch[l] + i, d);
        end
    for (int n = 0; n < ch[4]; n++) begin
      logic [HDW-1:0] d;
      d = '0;
      for (int j = 0; j < nc; j++) d[j*8 +: 8] = 8'(wfc[n * nc + j]);
      host_write(4'd4, 0, n, d);
    end
    for (int l = 0; l < 4; l++) host_write(4'hE, 0, l, HDW'(vth[l]));
    host_write(4'hF, 0, 0, HDW'(1));
    @(negedge clk); host_we = 0;
    $display("weights loaded at cycle %0d", cyc);
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < 32; r++)
        for (int c = 0; c < 32; c++) begin
          logic [IN_C-1:0] sv;
          logic last;
          for (int i = 0; i < ch[0]; i++) sv[i] = inmap[f][(r * 32 + c) * ch[0] + i];
          last = (r == 31) && (c == 31);
          pixels++;
          if (sv != '0 || last) begin
            events++;
            @(negedge clk);
            ev_in_valid = 1; ev_in_data = {last, 5'(r), 5'(c), sv};
            @(posedge clk);
            while (!ev_in_ready) @(posedge clk);
            @(negedge clk); ev_in_valid = 0;
          end
        end
  end

  // ---------------------------------------------------------------- monitors
  always @(posedge clk) begin
    cyc++;
    if (ev_in_valid && !ev_in_ready) stalls++;
    if ($countones(layer_busy) >= 2) overlap++;
  end

  // slowest conv stage (Eq. 8): every output pixel costs (Co/P)*Ci cycles plus a
  // drain of about 5, every other padded input pixel one cycle
  function automatic longint stage_est(input int l);
    longint hp = HW[l] + 2;
    return longint'(HW[l]) * HW[l] * ((CH[l+1] / PF[l]) * CH[l] + 5) + hp * hp - HW[l] * HW[l];
  endfunction

  int nres = 0;
  always @(posedge clk) if (rst_n && res_valid) begin
    check(int'(cls) == exp_cls[nres], $sformatf("frame %0d class %0d vs %0d", nres, cls, exp_cls[nres]));
    for (int j = 0; j < NCLS; j++)
      check(int'(score[j]) == exp_score[nres][j],
            $sformatf("frame %0d score %0d: %0d vs %0d", nres, j, score[j], exp_score[nres][j]));
    t_res.push_back(cyc);
    $display("frame %0d classified as %0d at cycle %0d", nres, cls, cyc);
    nres++;
    if (nres == NF) all_res = 1;
  end

  bit all_res = 0;
  initial begin
    longint est;
    wait (all_res);
    repeat (2) @(posedge clk);
    est = 0;
    for (int l = 0; l < 4; l++) if (stage_est(l) > est) est = stage_est(l);
    check(frames_in == 16'(NF) && frames_out == 16'(NF) && !busy, "frame counters");
    check(stalls > 0, "input back-pressure happened");
    check(overlap > 0, "two layers computed at the same time (layer-wise pipelining)");
    check(events < pixels, "all-zero vectors were not transmitted");
    if (NF > 1) begin
      longint gap;
      gap = t_res[NF-1] - t_res[NF-2];
      $display("frame interval %0d cycles, slowest-stage estimate %0d", gap, est);
      check(gap * 10 >= est * 9 && gap * 10 <= est * 13, "frame interval follows the slowest stage");
    end
    $display("stalls %0d, pipelined cycles %0d, events %0d of %0d pixels", stalls, overlap, events, pixels);
    done = 1;
  end
endmodule
