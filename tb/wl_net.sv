// wl_net: runs a whole network other than the built SCNN5 top on a chain of the
// accelerator's own stages, and checks it end to end. Shared by the workload
// testbenches tb_wl_scnn3 and tb_wl_vmobilenet.
//
// NET = 0 is SCNN3 for MNIST, 28x28 16c3-32c3-p2-32c3-p2-fc. The first 16c3
// layer is the spike encoder and is not accelerated, so the chain is two
// standard conv stages: 16->32 at 28x28 with P=4, then 32->32 at 14x14 with P=2.
// Both pool. The fc layer has 7*7*32 inputs. That is 54 PEs.
//
// NET = 1 is vMobileNet for MNIST, 28x28 16c3-16dwc3/32c1-32dwc3/64c1-64dwc3/
// 64c1-64dwc3/128c1-fc. Each depthwise-separable block is a depthwise 3x3 stage
// (P=1) followed by a pointwise 1x1 stage (P=1). The network names no pooling,
// so every map stays 28x28, and the fc layer has 28*28*128 inputs. That is
// 4*(9+1) = 40 PEs.
//
// Every stage is an sti_layer followed by an sti_fifo, as in the accelerator top.
// Then come an event decoder and sti_fc. Weights are random int8. Each stage's
// threshold is the median potential of frame 0 plus one. Inputs are spatially
// sparse random spike maps. The reference model of snn_ref_pkg computes the
// expected class potentials. The helper checks:
//   * every class potential and the winning class;
//   * that input back-pressure occurred;
//   * that two or more stages were busy at once;
//   * that all-zero input vectors were not sent;
//   * that the frame interval lies within 0.9 to 1.3 times the slowest stage's
//     cycle estimate.
module wl_net
  import sti_pkg::*;
  import snn_ref_pkg::*;
#(
  parameter int NET = 0,
  parameter int NF = 2,
  parameter int SEED = 3
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done
);
  // stage table: field 0 CI, 1 CO, 2 H (= W) of the input map, 3 K, 4 PAD, 5 P,
  // 6 MODE, 7 POOL
  function automatic int cfg(input int net, input int s, input int f);
    int t [8];
    if (net == 0)
      case (s)
        0:       t = '{16, 32, 28, 3, 1, 4, 0, 1};
        default: t = '{32, 32, 14, 3, 1, 2, 0, 1};
      endcase
    else
      case (s)
        0:       t = '{16,  16, 28, 3, 1, 1, 1, 0};
        1:       t = '{16,  32, 28, 1, 0, 1, 2, 0};
        2:       t = '{32,  32, 28, 3, 1, 1, 1, 0};
        3:       t = '{32,  64, 28, 1, 0, 1, 2, 0};
        4:       t = '{64,  64, 28, 3, 1, 1, 1, 0};
        5:       t = '{64,  64, 28, 1, 0, 1, 2, 0};
        6:       t = '{64,  64, 28, 3, 1, 1, 1, 0};
        default: t = '{64, 128, 28, 1, 0, 1, 2, 0};
      endcase
    return t[f];
  endfunction

  localparam int NS   = (NET == 0) ? 2 : 8;
  localparam int IN_H = 28;
  localparam int IN_C = 16;
  localparam int FC_C = (NET == 0) ? 32 : 128;
  localparam int FC_H = (NET == 0) ? 7 : 28;
  localparam int NCLS = 10;
  localparam int NIN  = FC_C * FC_H * FC_H;
  localparam int MAXW = 1 + 5 + 5 + 128;
  localparam int EW_IN = ev_w(IN_C, IN_H, IN_H);
  localparam int EW_FC = ev_w(FC_C, FC_H, FC_H);
  localparam int FAW  = $clog2(NIN);

  // ------------------------------------------------------------ the chain
  logic [MAXW-1:0] ev_d [NS+1];
  logic            ev_v [NS+1];
  logic            ev_r [NS+1];
  logic [NS-1:0]   st_busy;
  logic            in_v;
  logic [MAXW-1:0] in_d;

  assign ev_v[0] = in_v;
  assign ev_d[0] = in_d;
  logic            w_we;
  logic [3:0]      w_sel;
  logic [1:0]      w_bank;
  logic [19:0]     w_addr;
  logic [71:0]     w_data;
  int              vth [NS];

  for (genvar s = 0; s < NS; s++) begin : g_st
    localparam int CI = cfg(NET, s, 0), CO = cfg(NET, s, 1), H = cfg(NET, s, 2);
    localparam int K = cfg(NET, s, 3), PAD = cfg(NET, s, 4), P = cfg(NET, s, 5);
    localparam conv_mode_e MODE = conv_mode_e'(cfg(NET, s, 6));
    localparam bit POOL = cfg(NET, s, 7) != 0;
    localparam int HC = H + 2 * PAD - K + 1;
    localparam int HO = POOL ? HC / 2 : HC;
    localparam int EWI = ev_w(CI, H, H), EWO = ev_w(CO, HO, HO);
    localparam int NG = CO / P;
    localparam int DEPTH = (MODE == MODE_DW) ? NG : NG * CI;
    localparam int AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);
    localparam int BW = (P <= 2) ? 1 : $clog2(P);

    logic          lv, lr;
    logic [EWO-1:0] ld, fd;

    sti_layer #(.CI(CI), .CO(CO), .H(H), .W(H), .PAD(PAD), .K(K), .P(P), .MODE(MODE),
                .POOL(POOL)) u_layer (
      .clk, .rst_n, .vth(acc_t'(vth[s])),
      .w_we(w_we && w_sel == 4'(s)), .w_bank(w_bank[BW-1:0]), .w_addr(w_addr[AW-1:0]),
      .w_data(w_data[K*K*8-1:0]),
      .ev_in_valid(ev_v[s]), .ev_in_ready(ev_r[s]), .ev_in_data(ev_d[s][EWI-1:0]),
      .ev_out_valid(lv), .ev_out_ready(lr), .ev_out_data(ld), .busy(st_busy[s]));

    sti_fifo #(.WIDTH(EWO), .DEPTH(16)) u_fifo (
      .clk, .rst_n, .in_valid(lv), .in_ready(lr), .in_data(ld),
      .out_valid(ev_v[s+1]), .out_ready(ev_r[s+1]), .out_data(fd), .count());

    assign ev_d[s+1] = MAXW'(fd);
  end

  logic             fc_v, fc_r, res_valid;
  logic [FC_C-1:0]  fc_sv;
  acc_t             score [NCLS];
  logic [3:0]       cls;
  logic             fc_we;
  logic [FAW-1:0]   fc_addr;
  logic [79:0]      fc_data;

  sti_event_decoder #(.C(FC_C), .H(FC_H), .W(FC_H)) u_dec (
    .clk, .rst_n, .ev_valid(ev_v[NS]), .ev_ready(ev_r[NS]), .ev_data(ev_d[NS][EW_FC-1:0]),
    .out_valid(fc_v), .out_ready(fc_r), .out_sv(fc_sv));

  sti_fc #(.C(FC_C), .H(FC_H), .W(FC_H), .NCLS(NCLS)) u_fc (
    .clk, .rst_n, .w_we(fc_we), .w_addr(fc_addr), .w_data(fc_data),
    .in_valid(fc_v), .in_ready(fc_r), .in_sv(fc_sv), .res_valid, .score, .cls);

  // ------------------------------------------------------------ reference
  imap_t wt [NS];
  imap_t wfc;
  bmap_t inmap [NF];
  int    exp_score [NF][NCLS];
  int    exp_cls [NF];
  int    stalls = 0, overlap = 0, events = 0, pixels = 0;
  longint cyc = 0;
  longint t_res [$];
  int    nres = 0;
  bit    all_res = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    void'($urandom(SEED));
    checks = 0; failures = 0; done = 0;
    for (int s = 0; s < NS; s++) begin
      int n;
      n = (cfg(NET, s, 6) == 1) ? cfg(NET, s, 1) * 9
                                : cfg(NET, s, 1) * cfg(NET, s, 0) * cfg(NET, s, 3) * cfg(NET, s, 3);
      wt[s] = new[n];
      foreach (wt[s][i]) wt[s][i] = int'($urandom_range(0, 30)) - 10;
    end
    wfc = new[NIN * NCLS];
    foreach (wfc[i]) wfc[i] = int'($urandom_range(0, 40)) - 20;
    for (int f = 0; f < NF; f++) begin
      inmap[f] = new[IN_H * IN_H * IN_C];
      for (int px = 0; px < IN_H * IN_H; px++) begin
        bit act;
        act = ($urandom_range(0, 99) < 40);
        for (int i = 0; i < IN_C; i++)
          inmap[f][px * IN_C + i] = act && ($urandom_range(0, 99) < 25);
      end
    end
    for (int f = 0; f < NF; f++) begin
      bmap_t m;
      m = inmap[f];
      for (int s = 0; s < NS; s++) begin
        imap_t v;
        int ci, co, h, k, pad;
        ci = cfg(NET, s, 0); co = cfg(NET, s, 1); h = cfg(NET, s, 2);
        k = cfg(NET, s, 3); pad = cfg(NET, s, 4);
        v = (cfg(NET, s, 6) == 1) ? dw_pot(m, ci, h, h, wt[s], k, pad)
                                  : conv_pot(m, ci, h, h, wt[s], co, k, pad);
        if (f == 0) vth[s] = median(v) + 1;
        m = fire(v, vth[s]);
        if (cfg(NET, s, 7) != 0) m = pool2(m, co, h + 2 * pad - k + 1, h + 2 * pad - k + 1);
      end
      exp_cls[f] = 0;
      for (int j = 0; j < NCLS; j++) begin
        exp_score[f][j] = 0;
        for (int n = 0; n < NIN; n++) if (m[n]) exp_score[f][j] += wfc[n * NCLS + j];
        if (exp_score[f][j] > exp_score[f][exp_cls[f]]) exp_cls[f] = j;
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  initial begin
    w_we = 0; w_sel = 0; w_bank = 0; w_addr = 0; w_data = 0;
    fc_we = 0; fc_addr = 0; fc_data = 0;
    in_v = 0; in_d = '0;
    @(posedge rst_n);
    repeat (2) @(posedge clk);
    for (int s = 0; s < NS; s++) begin
      int ci, co, k, p;
      bit dw;
      ci = cfg(NET, s, 0); co = cfg(NET, s, 1); k = cfg(NET, s, 3); p = cfg(NET, s, 5);
      dw = (cfg(NET, s, 6) == 1);
      for (int o = 0; o < co; o++)
        for (int i = 0; i < (dw ? 1 : ci); i++) begin
          @(negedge clk);
          w_we = 1; w_sel = 4'(s); w_bank = 2'(o % p);
          w_addr = 20'(dw ? o / p : (o / p) * ci + i);
          w_data = '0;
          for (int q = 0; q < k * k; q++)
            w_data[q*8 +: 8] = 8'(dw ? wt[s][o * 9 + q] : wt[s][(o * ci + i) * k * k + q]);
        end
    end
    @(negedge clk); w_we = 0;
    for (int n = 0; n < NIN; n++) begin
      @(negedge clk);
      fc_we = 1; fc_addr = FAW'(n);
      for (int j = 0; j < NCLS; j++) fc_data[j*8 +: 8] = 8'(wfc[n * NCLS + j]);
    end
    @(negedge clk); fc_we = 0;
    $display("weights loaded at cycle %0d", cyc);
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < IN_H; r++)
        for (int c = 0; c < IN_H; c++) begin
          logic [IN_C-1:0] sv;
          logic last;
          for (int i = 0; i < IN_C; i++) sv[i] = inmap[f][(r * IN_H + c) * IN_C + i];
          last = (r == IN_H - 1) && (c == IN_H - 1);
          pixels++;
          if (sv != '0 || last) begin
            events++;
            @(negedge clk);
            in_v = 1; in_d = MAXW'({last, 5'(r), 5'(c), sv});
            @(posedge clk);
            while (!ev_r[0]) @(posedge clk);
            @(negedge clk); in_v = 0;
          end
        end
  end

  // ------------------------------------------------------------ monitors
  always @(posedge clk) begin
    cyc++;
    if (ev_v[0] && !ev_r[0]) stalls++;
    if ($countones(st_busy) >= 2) overlap++;
  end

  // cycles of stage s per frame: every output pixel costs (CO/P)*CI cycles
  // ((CO/P) in depthwise mode) plus the drain, every padding position one cycle
  function automatic longint stage_est(input int s);
    longint h, hp, ho, per;
    h = cfg(NET, s, 2);
    hp = h + 2 * cfg(NET, s, 4);
    ho = hp - cfg(NET, s, 3) + 1;
    case (cfg(NET, s, 6))
      1:       per = cfg(NET, s, 1) / cfg(NET, s, 5) + 5;
      2:       per = (cfg(NET, s, 1) / cfg(NET, s, 5)) * cfg(NET, s, 0) + 4;
      default: per = (cfg(NET, s, 1) / cfg(NET, s, 5)) * cfg(NET, s, 0) + 5;
    endcase
    return ho * ho * per + hp * hp - ho * ho;
  endfunction

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

  initial begin
    longint est;
    wait (all_res);
    repeat (2) @(posedge clk);
    est = 0;
    for (int s = 0; s < NS; s++) if (stage_est(s) > est) est = stage_est(s);
    check(stalls > 0, "input back-pressure happened");
    check(overlap > 0, "two stages computed at the same time");
    check(events < pixels, "all-zero input vectors were not transmitted");
    if (NF > 1) begin
      longint gap;
      gap = t_res[NF-1] - t_res[NF-2];
      $display("frame interval %0d cycles, slowest-stage estimate %0d", gap, est);
      check(gap * 10 >= est * 9 && gap * 10 <= est * 13, "frame interval follows the slowest stage");
    end
    $display("thresholds %p", vth);
    $display("stalls %0d, pipelined cycles %0d, events %0d of %0d pixels", stalls, overlap, events, pixels);
    done = 1;
  end
endmodule
