// sti_event_decoder: hardware decoder at the input of a layer (Sec. IV-E1).
//
// Turns the spike-event stream {last, row, col, sv} of a C x H x W map back into
// the dense raster stream of spike vectors that the line buffer needs. A position
// counter walks the frame; while the next event lies ahead of the counter, all-zero
// vectors are produced; when it matches, the event's vector is produced and the
// event is consumed. Zero vectors are only produced once the next event is known
// (ev_valid), so the raster order is never guessed. Events must arrive in raster
// order with the frame's last pixel marked, as sti_event_encoder sends them.
// Combinational data path, valid/ready on both sides. out_valid is ev_valid
// wired through (a vector, zero or not, is due whenever an event is waiting), so
// it shows as an output driven straight from an input. clk and rst_n clock the
// position counter (asynchronous reset) and also the end-of-frame assertion,
// whose disable condition makes rst_n look synchronous to lint as well; both
// uses are intended.
module sti_event_decoder
  import sti_pkg::*;
#(
  parameter int unsigned C = 64,
  parameter int unsigned H = 16,
  parameter int unsigned W = 16,
  localparam int unsigned EW = ev_w(C, H, W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ev_valid,
  output logic          ev_ready,
  input  logic [EW-1:0] ev_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [C-1:0]  out_sv
);

  localparam int unsigned RW = clog2_min1(H);
  localparam int unsigned CW = clog2_min1(W);

  logic [RW-1:0] r_q, ev_r;
  logic [CW-1:0] c_q, ev_c;
  logic [C-1:0]  ev_sv;
  logic          ev_last, hit, adv;

  assign {ev_last, ev_r, ev_c, ev_sv} = ev_data;
  assign hit       = (ev_r == r_q) && (ev_c == c_q);
  assign out_valid = ev_valid;
  assign out_sv    = hit ? ev_sv : '0;
  assign ev_ready  = hit && out_ready;
  assign adv       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q <= '0;
      c_q <= '0;
    end else if (adv) begin
      if (32'(c_q) == W - 1) begin
        c_q <= '0;
        r_q <= (32'(r_q) == H - 1) ? '0 : r_q + 1'b1;
      end else begin
        c_q <= c_q + 1'b1;
      end
    end
  end

  // The end-of-frame flag only ever sits on the frame's last position.
  a_last_pos: assert property (@(posedge clk) disable iff (!rst_n)
    ev_valid && ev_last |-> (32'(ev_r) == H - 1 && 32'(ev_c) == W - 1))
    else $error("sti_event_decoder: last flag on a non-final position");

endmodule
