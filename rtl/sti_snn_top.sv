// sti_snn_top: STI-SNN streaming accelerator configured for SCNN5 (CIFAR10,
// 32x32 64c3-p2-128c3-p2-256c3-p2-256c3-p2-512c3-p2-fc, parallel factors 4,4,2,1,
// 99 PEs), running every layer in a single timestep.
//
// The first 64c3 layer encodes the image into spikes outside the accelerator; its
// 32x32x64 spikes arrive as spike events on ev_in (format {last, row, col, sv}).
// Data path: input FIFO -> decoder -> 2x2 OR pool -> encoder -> four pipelined
// stages (sti_layer: decode, pad 1, 3x3 convolution, pool, encode) joined by event
// FIFOs -> decoder -> fully connected layer (10 classes). All stages work on
// different frames at the same time (layer-wise pipelining); valid/ready
// handshakes and the FIFOs keep them in step. Weights and thresholds are written
// through the host bus of sti_control (targets 0..3 = conv layers, 4 = fc,
// 0xE = threshold of layer `addr`, 0xF = run). Input is accepted only while run=1.
// Result: res_valid pulses with the 10 class potentials and the winning class.
//
// Timing: the slowest stage sets the frame interval (Eq. 7 of the paper). With the
// default sizes every conv stage needs about Ho*Wo*(Co/P)*Ci = 524288 cycles per
// frame, i.e. 2.6 ms at 200 MHz. Channel counts and parallel factors are
// parameters; the spatial chain is fixed by SCNN5 (five 2x halvings of 32x32).
// The host address is 20 bits for every target; the largest weight memory
// (conv 4, 512*256 words) needs 17, so the top address bits go unread at the
// default size, and the FIFO fill levels are not brought out (left unconnected).
// Reset is asynchronous in the flops; the layers' handshake assertions also use
// it as their disable condition, which lint reports as a mixed sync/async use.
module sti_snn_top
  import sti_pkg::*;
#(
  parameter int unsigned IN_C = 64,   // spikes of the off-chip 64c3 encoding layer
  parameter int unsigned C1   = 128,
  parameter int unsigned C2   = 256,
  parameter int unsigned C3   = 256,
  parameter int unsigned C4   = 512,
  parameter int unsigned P1   = 4,
  parameter int unsigned P2   = 4,
  parameter int unsigned P3   = 2,
  parameter int unsigned P4   = 1,
  parameter int unsigned NCLS = 10,   // CIFAR10 classes
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned IN_H  = 32,  // CIFAR10 image size
  localparam int unsigned IN_W  = 32,
  localparam int unsigned EW_IN = ev_w(IN_C, IN_H, IN_W),
  localparam int unsigned HAW   = 20,
  localparam int unsigned HBW   = 2,
  localparam int unsigned HDW   = ((NCLS > 9) ? NCLS : 9) * WGT_W,
  localparam int unsigned CLW   = (NCLS <= 2) ? 1 : $clog2(NCLS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host bus (weights, thresholds, run)
  input  logic             host_we,
  input  logic [3:0]       host_sel,
  input  logic [HBW-1:0]   host_bank,
  input  logic [HAW-1:0]   host_addr,
  input  logic [HDW-1:0]   host_data,
  // input spike events from the encoding layer
  input  logic             ev_in_valid,
  output logic             ev_in_ready,
  input  logic [EW_IN-1:0] ev_in_data,
  // classification result
  output logic             res_valid,
  output acc_t             score [NCLS],
  output logic [CLW-1:0]   cls,
  output logic [15:0]      frames_in,
  output logic [15:0]      frames_out,
  output logic             busy,
  output logic [3:0]       layer_busy
);

  localparam int unsigned EW0 = ev_w(IN_C, 16, 16);
  localparam int unsigned EW1 = ev_w(C1, 8, 8);
  localparam int unsigned EW2 = ev_w(C2, 4, 4);
  localparam int unsigned EW3 = ev_w(C3, 2, 2);
  localparam int unsigned EW4 = ev_w(C4, 1, 1);
  localparam int unsigned WW  = 9 * WGT_W;
  // weight-buffer address and bank widths of the four conv layers and the fc
  localparam int unsigned A1 = $clog2((C1 / P1) * IN_C);
  localparam int unsigned A2 = $clog2((C2 / P2) * C1);
  localparam int unsigned A3 = $clog2((C3 / P3) * C2);
  localparam int unsigned A4 = $clog2((C4 / P4) * C3);
  localparam int unsigned A5 = (C4 <= 2) ? 1 : $clog2(C4);
  localparam int unsigned B1 = (P1 <= 2) ? 1 : $clog2(P1);
  localparam int unsigned B2 = (P2 <= 2) ? 1 : $clog2(P2);
  localparam int unsigned B3 = (P3 <= 2) ? 1 : $clog2(P3);
  localparam int unsigned B4 = (P4 <= 2) ? 1 : $clog2(P4);

  logic [4:0]     we;
  logic [HBW-1:0] wbank;
  logic [HAW-1:0] waddr;
  logic [HDW-1:0] wdata;
  acc_t           vth [4];
  logic           run;

  sti_control #(.NT(5), .NL(4), .AW(HAW), .BW(HBW), .DATA_W(HDW)) u_ctrl (
    .clk, .rst_n, .host_we, .host_sel, .host_bank, .host_addr, .host_data,
    .we_o(we), .bank_o(wbank), .addr_o(waddr), .data_o(wdata), .vth, .run,
    .in_frame(ev_in_valid && ev_in_ready && ev_in_data[EW_IN-1]),
    .out_frame(res_valid), .frames_in, .frames_out, .busy
  );

  // ---------------------------------------------------------------- input stage
  logic             fi_valid, fi_ready;
  logic [EW_IN-1:0] fi_data;
  logic             gated_valid;
  logic             d0_valid, d0_ready, q0_valid, q0_ready;
  logic [IN_C-1:0]  d0_sv, q0_sv;
  logic             e0_valid, e0_ready;
  logic [EW0-1:0]   e0_data;

  assign gated_valid = ev_in_valid && run;
  logic fin_ready;
  assign ev_in_ready = fin_ready && run;

  sti_fifo #(.WIDTH(EW_IN), .DEPTH(FIFO_DEPTH)) u_fifo_in (
    .clk, .rst_n, .in_valid(gated_valid), .in_ready(fin_ready), .in_data(ev_in_data),
    .out_valid(fi_valid), .out_ready(fi_ready), .out_data(fi_data), .count()
  );

  sti_event_decoder #(.C(IN_C), .H(IN_H), .W(IN_W)) u_dec0 (
    .clk, .rst_n, .ev_valid(fi_valid), .ev_ready(fi_ready), .ev_data(fi_data),
    .out_valid(d0_valid), .out_ready(d0_ready), .out_sv(d0_sv)
  );

  sti_pool #(.C(IN_C), .H(IN_H), .W(IN_W)) u_pool0 (
    .clk, .rst_n, .in_valid(d0_valid), .in_ready(d0_ready), .in_sv(d0_sv),
    .out_valid(q0_valid), .out_ready(q0_ready), .out_sv(q0_sv)
  );

  sti_event_encoder #(.C(IN_C), .H(16), .W(16)) u_enc0 (
    .clk, .rst_n, .in_valid(q0_valid), .in_ready(q0_ready), .in_sv(q0_sv),
    .ev_valid(e0_valid), .ev_ready(e0_ready), .ev_data(e0_data)
  );

  // ---------------------------------------------------------------- conv stages
  logic           f0_valid, f0_ready, l1_valid, l1_ready, f1_valid, f1_ready;
  logic           l2_valid, l2_ready, f2_valid, f2_ready, l3_valid, l3_ready;
  logic           f3_valid, f3_ready, l4_valid, l4_ready, f4_valid, f4_ready;
  logic [EW0-1:0] f0_data;
  logic [EW1-1:0] l1_data, f1_data;
  logic [EW2-1:0] l2_data, f2_data;
  logic [EW3-1:0] l3_data, f3_data;
  logic [EW4-1:0] l4_data, f4_data;

  sti_fifo #(.WIDTH(EW0), .DEPTH(FIFO_DEPTH)) u_fifo0 (
    .clk, .rst_n, .in_valid(e0_valid), .in_ready(e0_ready), .in_data(e0_data),
    .out_valid(f0_valid), .out_ready(f0_ready), .out_data(f0_data), .count()
  );

  sti_layer #(.CI(IN_C), .CO(C1), .H(16), .W(16), .PAD(1), .K(3), .P(P1)) u_l1 (
    .clk, .rst_n, .vth(vth[0]), .w_we(we[0]), .w_bank(wbank[B1-1:0]),
    .w_addr(waddr[A1-1:0]), .w_data(wdata[WW-1:0]),
    .ev_in_valid(f0_valid), .ev_in_ready(f0_ready), .ev_in_data(f0_data),
    .ev_out_valid(l1_valid), .ev_out_ready(l1_ready), .ev_out_data(l1_data),
    .busy(layer_busy[0])
  );

  sti_fifo #(.WIDTH(EW1), .DEPTH(FIFO_DEPTH)) u_fifo1 (
    .clk, .rst_n, .in_valid(l1_valid), .in_ready(l1_ready), .in_data(l1_data),
    .out_valid(f1_valid), .out_ready(f1_ready), .out_data(f1_data), .count()
  );

  sti_layer #(.CI(C1), .CO(C2), .H(8), .W(8), .PAD(1), .K(3), .P(P2)) u_l2 (
    .clk, .rst_n, .vth(vth[1]), .w_we(we[1]), .w_bank(wbank[B2-1:0]),
    .w_addr(waddr[A2-1:0]), .w_data(wdata[WW-1:0]),
    .ev_in_valid(f1_valid), .ev_in_ready(f1_ready), .ev_in_data(f1_data),
    .ev_out_valid(l2_valid), .ev_out_ready(l2_ready), .ev_out_data(l2_data),
    .busy(layer_busy[1])
  );

  sti_fifo #(.WIDTH(EW2), .DEPTH(FIFO_DEPTH)) u_fifo2 (
    .clk, .rst_n, .in_valid(l2_valid), .in_ready(l2_ready), .in_data(l2_data),
    .out_valid(f2_valid), .out_ready(f2_ready), .out_data(f2_data), .count()
  );

  sti_layer #(.CI(C2), .CO(C3), .H(4), .W(4), .PAD(1), .K(3), .P(P3)) u_l3 (
    .clk, .rst_n, .vth(vth[2]), .w_we(we[2]), .w_bank(wbank[B3-1:0]),
    .w_addr(waddr[A3-1:0]), .w_data(wdata[WW-1:0]),
    .ev_in_valid(f2_valid), .ev_in_ready(f2_ready), .ev_in_data(f2_data),
    .ev_out_valid(l3_valid), .ev_out_ready(l3_ready), .ev_out_data(l3_data),
    .busy(layer_busy[2])
  );

  sti_fifo #(.WIDTH(EW3), .DEPTH(FIFO_DEPTH)) u_fifo3 (
    .clk, .rst_n, .in_valid(l3_valid), .in_ready(l3_ready), .in_data(l3_data),
    .out_valid(f3_valid), .out_ready(f3_ready), .out_data(f3_data), .count()
  );

  sti_layer #(.CI(C3), .CO(C4), .H(2), .W(2), .PAD(1), .K(3), .P(P4)) u_l4 (
    .clk, .rst_n, .vth(vth[3]), .w_we(we[3]), .w_bank(wbank[B4-1:0]),
    .w_addr(waddr[A4-1:0]), .w_data(wdata[WW-1:0]),
    .ev_in_valid(f3_valid), .ev_in_ready(f3_ready), .ev_in_data(f3_data),
    .ev_out_valid(l4_valid), .ev_out_ready(l4_ready), .ev_out_data(l4_data),
    .busy(layer_busy[3])
  );

  sti_fifo #(.WIDTH(EW4), .DEPTH(FIFO_DEPTH)) u_fifo4 (
    .clk, .rst_n, .in_valid(l4_valid), .in_ready(l4_ready), .in_data(l4_data),
    .out_valid(f4_valid), .out_ready(f4_ready), .out_data(f4_data), .count()
  );

  // ---------------------------------------------------------------- fc stage
  logic          d5_valid, d5_ready;
  logic [C4-1:0] d5_sv;

  sti_event_decoder #(.C(C4), .H(1), .W(1)) u_dec5 (
    .clk, .rst_n, .ev_valid(f4_valid), .ev_ready(f4_ready), .ev_data(f4_data),
    .out_valid(d5_valid), .out_ready(d5_ready), .out_sv(d5_sv)
  );

  sti_fc #(.C(C4), .H(1), .W(1), .NCLS(NCLS)) u_fc (
    .clk, .rst_n, .w_we(we[4]), .w_addr(waddr[A5-1:0]),
    .w_data(wdata[NCLS*WGT_W-1:0]),
    .in_valid(d5_valid), .in_ready(d5_ready), .in_sv(d5_sv),
    .res_valid, .score, .cls
  );

endmodule
