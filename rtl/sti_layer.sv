// sti_layer: one stage of the layer-wise pipeline (Fig. 5: PAD, CONV, POOL).
//
// Spike events of the CI x H x W input map enter through an event decoder, which
// rebuilds the dense raster stream; sti_pad adds PAD zero rows/columns; the
// convolution layer computes the CO output channels; an optional 2x2 OR pooling
// halves the map; and the event encoder sends the non-zero output vectors to the
// next stage. Every hop uses valid/ready, so a stage stalls whenever the next one is
// busy and nothing is lost. The output map is CO x HP x WP with
// HP = (H+2*PAD-K+1)/(POOL ? 2 : 1), likewise WP. The decoder's end-of-frame
// assertion uses rst_n as its disable condition next to the asynchronous resets
// of the flops, which lint reports as a mixed sync/async use of rst_n.
module sti_layer
  import sti_pkg::*;
#(
  parameter int unsigned CI   = 64,
  parameter int unsigned CO   = 128,
  parameter int unsigned H    = 16,
  parameter int unsigned W    = 16,
  parameter int unsigned PAD  = 1,
  parameter int unsigned K    = 3,
  parameter int unsigned P    = 4,
  parameter conv_mode_e  MODE = MODE_STD,
  parameter bit          POOL = 1'b1,
  localparam int unsigned HC   = H + 2 * PAD - K + 1,
  localparam int unsigned WC   = W + 2 * PAD - K + 1,
  localparam int unsigned HP   = POOL ? HC / 2 : HC,
  localparam int unsigned WP   = POOL ? WC / 2 : WC,
  localparam int unsigned EWI  = ev_w(CI, H, W),
  localparam int unsigned EWO  = ev_w(CO, HP, WP),
  localparam int unsigned NG   = CO / P,
  localparam int unsigned DEPTH = (MODE == MODE_DW) ? NG : NG * CI,
  localparam int unsigned AW   = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned BW   = (P <= 2) ? 1 : $clog2(P),
  localparam int unsigned WORD_W = K * K * WGT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  acc_t              vth,
  input  logic              w_we,
  input  logic [BW-1:0]     w_bank,
  input  logic [AW-1:0]     w_addr,
  input  logic [WORD_W-1:0] w_data,
  input  logic              ev_in_valid,
  output logic              ev_in_ready,
  input  logic [EWI-1:0]    ev_in_data,
  output logic              ev_out_valid,
  input  logic              ev_out_ready,
  output logic [EWO-1:0]    ev_out_data,
  output logic              busy
);

  logic          d_valid, d_ready, p_valid, p_ready, c_valid, c_ready, o_valid, o_ready;
  logic [CI-1:0] d_sv, p_sv;
  logic [CO-1:0] c_sv, o_sv;

  sti_event_decoder #(.C(CI), .H(H), .W(W)) u_dec (
    .clk, .rst_n, .ev_valid(ev_in_valid), .ev_ready(ev_in_ready), .ev_data(ev_in_data),
    .out_valid(d_valid), .out_ready(d_ready), .out_sv(d_sv)
  );

  sti_pad #(.C(CI), .H(H), .W(W), .PAD(PAD)) u_pad (
    .clk, .rst_n, .in_valid(d_valid), .in_ready(d_ready), .in_sv(d_sv),
    .out_valid(p_valid), .out_ready(p_ready), .out_sv(p_sv)
  );

  sti_conv_layer #(.CI(CI), .CO(CO), .HI(H + 2 * PAD), .WI(W + 2 * PAD), .K(K), .P(P),
                   .MODE(MODE)) u_conv (
    .clk, .rst_n, .vth, .w_we, .w_bank, .w_addr, .w_data,
    .in_valid(p_valid), .in_ready(p_ready), .in_sv(p_sv),
    .out_valid(c_valid), .out_ready(c_ready), .out_sv(c_sv), .busy
  );

  if (POOL) begin : g_pool
    sti_pool #(.C(CO), .H(HC), .W(WC)) u_pool (
      .clk, .rst_n, .in_valid(c_valid), .in_ready(c_ready), .in_sv(c_sv),
      .out_valid(o_valid), .out_ready(o_ready), .out_sv(o_sv)
    );
  end else begin : g_nopool
    assign o_valid = c_valid;
    assign c_ready = o_ready;
    assign o_sv    = c_sv;
  end

  sti_event_encoder #(.C(CO), .H(HP), .W(WP)) u_enc (
    .clk, .rst_n, .in_valid(o_valid), .in_ready(o_ready), .in_sv(o_sv),
    .ev_valid(ev_out_valid), .ev_ready(ev_out_ready), .ev_data(ev_out_data)
  );

endmodule
