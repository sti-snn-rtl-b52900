// layer_case: one test case for sti_layer, used by tb_sti_layer.
// Sends NF sparse random frames as spike events, rebuilds the dense output map
// from the events the layer sends, and compares it with the reference model
// (pad, convolution in the layer's mode, integrate-and-fire with the median
// threshold of frame 0, optional pooling). Also counts events against pixels.
module layer_case
  import sti_pkg::*;
  import snn_ref_pkg::*;
#(
  parameter int CI = 4, CO = 8, H = 6, W = 6, PAD = 1, K = 3, P = 2,
  parameter conv_mode_e MODE = MODE_STD,
  parameter bit POOL = 1'b1,
  parameter int NF = 3, SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   events_out,
  output int   pixels_out,
  output bit   done
);
  localparam int HC = H + 2 * PAD - K + 1, WC = W + 2 * PAD - K + 1;
  localparam int HP = POOL ? HC / 2 : HC, WP = POOL ? WC / 2 : WC;
  localparam int EWI = ev_w(CI, H, W), EWO = ev_w(CO, HP, WP);
  localparam int NG = CO / P;
  localparam int DEPTH = (MODE == MODE_DW) ? NG : NG * CI;
  localparam int AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);
  localparam int BW = (P <= 2) ? 1 : $clog2(P);
  localparam int RWI = clog2_min1(H), CWI = clog2_min1(W);
  localparam int RWO = clog2_min1(HP), CWO = clog2_min1(WP);

  logic w_we, ev_in_valid, ev_in_ready, ev_out_valid, ev_out_ready, busy;
  logic [BW-1:0] w_bank;
  logic [AW-1:0] w_addr;
  logic [K*K*8-1:0] w_data;
  logic [EWI-1:0] ev_in_data;
  logic [EWO-1:0] ev_out_data;
  int vth;

  sti_layer #(.CI(CI), .CO(CO), .H(H), .W(W), .PAD(PAD), .K(K), .P(P), .MODE(MODE), .POOL(POOL)) dut (
    .clk, .rst_n, .vth(acc_t'(vth)), .w_we, .w_bank, .w_addr, .w_data,
    .ev_in_valid, .ev_in_ready, .ev_in_data, .ev_out_valid, .ev_out_ready, .ev_out_data, .busy);

  imap_t wt;
  bmap_t inm [NF];
  bmap_t outm [NF];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL layer mode %0d: %s", MODE, what); end
  endtask

  initial begin
    void'($urandom(SEED));
    checks = 0; failures = 0; done = 0; events_out = 0; pixels_out = 0;
    wt = new[(MODE == MODE_DW) ? CO * K * K : CO * CI * K * K];
    foreach (wt[i]) wt[i] = int'($urandom_range(0, 30)) - 10;
    for (int f = 0; f < NF; f++) begin
      imap_t v;
      inm[f] = new[H * W * CI];
      foreach (inm[f][i]) inm[f][i] = ($urandom_range(0, 9) < 3);
      v = (MODE == MODE_DW) ? dw_pot(inm[f], CI, H, W, wt, K, PAD)
                            : conv_pot(inm[f], CI, H, W, wt, CO, K, PAD);
      if (f == 0) vth = median(v) + 1;
      outm[f] = fire(v, vth);
      if (POOL) outm[f] = pool2(outm[f], CO, HC, WC);
    end
  end

  initial begin
    w_we = 0; w_bank = 0; w_addr = 0; w_data = 0; ev_in_valid = 0; ev_in_data = 0;
    @(posedge rst_n);
    for (int o = 0; o < CO; o++)
      for (int i = 0; i < ((MODE == MODE_DW) ? 1 : CI); i++) begin
        @(negedge clk);
        w_we = 1; w_bank = BW'(o % P);
        w_addr = AW'((MODE == MODE_DW) ? o / P : (o / P) * CI + i);
        for (int k = 0; k < K * K; k++)
          w_data[k*8 +: 8] = 8'((MODE == MODE_DW) ? wt[o * K * K + k] : wt[(o * CI + i) * K * K + k]);
      end
    @(negedge clk); w_we = 0;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          logic [CI-1:0] sv;
          logic last;
          for (int ch = 0; ch < CI; ch++) sv[ch] = inm[f][(r * W + c) * CI + ch];
          last = (r == H - 1) && (c == W - 1);
          if (sv != '0 || last) begin
            @(negedge clk);
            ev_in_valid = 1; ev_in_data = {last, RWI'(r), CWI'(c), sv};
            @(posedge clk);
            while (!ev_in_ready) @(posedge clk);
            @(negedge clk); ev_in_valid = 0;
          end
        end
  end

  // rebuild the output frames from the events
  int f_out = 0, next_pix = 0;
  always @(negedge clk) ev_out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && ev_out_valid && ev_out_ready && !done) begin
    logic last;
    logic [RWO-1:0] r;
    logic [CWO-1:0] c;
    logic [CO-1:0] sv;
    int pix;
    {last, r, c, sv} = ev_out_data;
    pix = int'(r) * WP + int'(c);
    events_out++;
    check(pix >= next_pix, "events in raster order");
    // pixels skipped since the previous event must be all-zero in the reference
    for (int q = next_pix; q < pix; q++)
      for (int ch = 0; ch < CO; ch++)
        check(outm[f_out][q * CO + ch] == 1'b0, $sformatf("frame %0d pixel %0d should be silent", f_out, q));
    for (int ch = 0; ch < CO; ch++)
      check(sv[ch] == outm[f_out][pix * CO + ch], $sformatf("frame %0d pixel %0d ch %0d", f_out, pix, ch));
    check(sv != '0 || last, "zero vectors are only sent as the last pixel");
    next_pix = pix + 1;
    if (last) begin
      check(pix == HP * WP - 1, "last flag on the final pixel");
      pixels_out += HP * WP;
      f_out++;
      next_pix = 0;
      if (f_out == NF) done = 1;
    end
  end
endmodule
