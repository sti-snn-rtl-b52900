// sti_conv_layer: one convolution layer of STI-SNN, the computation unit (CU)
// with its neurons, in the output-stationary (OS) dataflow of Fig. 6.
//
// Input: the (already padded) HI x WI raster stream of CI-bit spike vectors.
// Output: the HO x WO raster stream (HO = HI-K+1, WO = WI-K+1, stride 1) of CO-bit
// output spike vectors. Both sides use valid/ready handshakes.
//
// How it works. Every accepted input vector is pushed into the line buffer, which
// hands one image column of K vectors to the K PE rows; each row shifts it one PE
// to the left, so the K x K PE array always holds the current receptive field.
// There are P copies of the array (output channel parallelism, Sec. IV-E2); lane p
// computes output channels p, p+P, ... When a push completes a receptive field the
// layer stops taking input and runs the OS loop: for each channel group g and
// input channel ci it reads one weight word per lane (K*K weights) and broadcasts
// it to the lane's PEs together with index = ci; a PE adds its weight when its spike
// bit is 1. With the last input channel ctrl1 is raised, the psums go through the
// adder tree of sti_spike_gen (ctrl2), are compared with vth (ctrl3) and the spike
// bits are gathered by sti_genspk; when all CO/P groups are done (ctrl4) the output
// vector is offered and the receptive field moves on. The membrane potential never
// leaves the PE registers (single timestep).
//
// Modes (parameter MODE): MODE_STD as above; MODE_DW (CI = CO) issues one weight
// word per group, lane p selecting input channel g*P+p, and the PEs pass the weight
// through; MODE_PW (K = 1) accumulates like MODE_STD but the neuron compares the
// single psum directly.
//
// Timing: weight reads are pipelined with accumulation (T_rw hidden), so one
// output pixel takes (CO/P)*CI cycles in MODE_STD/MODE_PW and CO/P cycles in
// MODE_DW, plus a fixed drain of about 4 cycles, matching Eq. (8) with
// T_rw = 0, T_pe = 1 cycle and T_pes a few cycles. The weight-word layout, the
// stall-while-computing policy and the exact drain are this design's choices.
// All PEs and all lanes run in lockstep on the same control, so only the valid
// flag of PE (0,0) and of lane 0 is read; the other valid outputs are left
// unread on purpose (lint lists them as unused bits).
module sti_conv_layer
  import sti_pkg::*;
#(
  parameter int unsigned CI   = 64,
  parameter int unsigned CO   = 128,
  parameter int unsigned HI   = 18,
  parameter int unsigned WI   = 18,
  parameter int unsigned K    = 3,
  parameter int unsigned P    = 4,
  parameter conv_mode_e  MODE = MODE_STD,
  localparam int unsigned NG     = CO / P,
  localparam int unsigned DEPTH  = (MODE == MODE_DW) ? NG : NG * CI,
  localparam int unsigned AW     = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned BW     = (P <= 2) ? 1 : $clog2(P),
  localparam int unsigned WORD_W = K * K * WGT_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  acc_t           vth,
  // weight loading
  input  logic           w_we,
  input  logic [BW-1:0]  w_bank,
  input  logic [AW-1:0]  w_addr,
  input  logic [WORD_W-1:0] w_data,
  // input spike vectors
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [CI-1:0]  in_sv,
  // output spike vectors
  output logic           out_valid,
  input  logic           out_ready,
  output logic [CO-1:0]  out_sv,
  // activity (for monitoring)
  output logic           busy
);

  localparam int unsigned NPE = K * K;
  localparam int unsigned IW  = clog2_min1(CI);
  localparam int unsigned GW  = (NG <= 2) ? 1 : $clog2(NG);
  localparam int unsigned RW  = (HI <= 2) ? 1 : $clog2(HI);
  localparam int unsigned CW  = (WI <= 2) ? 1 : $clog2(WI);

  typedef enum logic [1:0] {S_FILL, S_RUN, S_WAIT} state_e;
  state_e state_q;

  logic          push;
  logic [CI-1:0] col [K];
  logic [RW-1:0] r_q;
  logic [CW-1:0] c_q;
  logic          window_full;
  logic [GW-1:0] g_q;
  logic [IW-1:0] ci_q;
  logic          issue, issue_last, issue_end;
  logic [AW-1:0] raddr;
  logic [WORD_W-1:0] rdata [P];

  // issue pipeline aligned with the weight read latency
  logic          wv_q, last_q;
  logic [IW-1:0] idx_q [P];

  logic [P-1:0]  lane_spike, lane_valid;
  logic [CO-1:0] gen_sv;
  logic          gen_done;

  // ------------------------------------------------------------------ input side
  assign in_ready = (state_q == S_FILL) && (!out_valid || out_ready);
  assign push     = in_valid && in_ready;
  assign window_full = (32'(r_q) >= K - 1) && (32'(c_q) >= K - 1);

  sti_line_buffer #(.CI(CI), .W(WI), .K(K)) u_lb (
    .clk, .rst_n, .push, .din(in_sv), .col
  );

  // ------------------------------------------------------------------ controller
  assign issue      = (state_q == S_RUN);
  assign issue_last = (MODE == MODE_DW) ? 1'b1 : (32'(ci_q) == CI - 1);
  assign issue_end  = issue && issue_last && (32'(g_q) == NG - 1);
  assign raddr      = (MODE == MODE_DW) ? AW'(g_q) : AW'(32'(g_q) * CI + 32'(ci_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_FILL;
      r_q       <= '0;
      c_q       <= '0;
      g_q       <= '0;
      ci_q      <= '0;
      out_valid <= 1'b0;
      out_sv    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state_q)
        S_FILL: if (push) begin
          if (32'(c_q) == WI - 1) begin
            c_q <= '0;
            r_q <= (32'(r_q) == HI - 1) ? '0 : r_q + 1'b1;
          end else begin
            c_q <= c_q + 1'b1;
          end
          if (window_full) begin
            state_q <= S_RUN;
            g_q     <= '0;
            ci_q    <= '0;
          end
        end
        S_RUN: begin
          if (issue_last) begin
            ci_q <= '0;
            g_q  <= g_q + 1'b1;
          end else begin
            ci_q <= ci_q + 1'b1;
          end
          if (issue_end) state_q <= S_WAIT;
        end
        S_WAIT: if (gen_done) begin
          out_valid <= 1'b1;
          out_sv    <= gen_sv;
          state_q   <= S_FILL;
        end
        default: state_q <= S_FILL;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wv_q   <= 1'b0;
      last_q <= 1'b0;
      for (int p = 0; p < int'(P); p++) idx_q[p] <= '0;
    end else begin
      wv_q   <= issue;
      last_q <= issue_last;
      for (int p = 0; p < int'(P); p++)
        idx_q[p] <= (MODE == MODE_DW) ? IW'(32'(g_q) * P + p) : ci_q;
    end
  end

  sti_weight_buffer #(.P(P), .DEPTH(DEPTH), .WORD_W(WORD_W)) u_wbuf (
    .clk, .we(w_we), .wbank(w_bank), .waddr(w_addr), .wdata(w_data),
    .rd_en(issue), .raddr, .rdata
  );

  // ------------------------------------------------------------------ PE arrays
  for (genvar p = 0; p < int'(P); p++) begin : g_lane
    logic [CI-1:0] sv [K][K];
    acc_t          psum [NPE];
    logic [NPE-1:0] pvalid;

    for (genvar kh = 0; kh < int'(K); kh++) begin : g_row
      for (genvar kw = 0; kw < int'(K); kw++) begin : g_col
        logic [CI-1:0] sv_in;
        if (kw == K - 1) begin : g_head
          assign sv_in = col[kh];
        end else begin : g_chain
          assign sv_in = sv[kh][kw+1];
        end
        sti_pe #(.CI(CI)) u_pe (
          .clk, .rst_n, .mode(MODE),
          .sv_shift(push), .sv_in, .sv_q(sv[kh][kw]),
          .w_valid(wv_q), .index(idx_q[p]),
          .weight(wgt_t'(rdata[p][(kh*K+kw)*WGT_W +: WGT_W])),
          .last(last_q),
          .psum(psum[kh*K+kw]), .psum_valid(pvalid[kh*K+kw])
        );
      end
    end

    acc_t vmem_unused;
    sti_spike_gen #(.NPE(NPE)) u_neuron (
      .clk, .rst_n, .mode(MODE), .vth,
      .en_vmem(1'b0), .vmem_in('0),
      .psum, .psum_valid(pvalid[0]),
      .spike(lane_spike[p]), .vmem_out(vmem_unused), .spike_valid(lane_valid[p])
    );
  end

  sti_genspk #(.CO(CO), .P(P)) u_genspk (
    .clk, .rst_n, .clear(1'b0),
    .spike(lane_spike), .spike_valid(lane_valid[0]),
    .sv_out(gen_sv), .done(gen_done)
  );

  assign busy = (state_q != S_FILL);

  initial begin
    assert (CO % P == 0) else $error("sti_conv_layer: CO must be a multiple of P");
    assert (MODE != MODE_DW || CI == CO) else $error("sti_conv_layer: depthwise needs CI == CO");
    assert (MODE != MODE_PW || K == 1) else $error("sti_conv_layer: pointwise needs K == 1");
  end

endmodule
