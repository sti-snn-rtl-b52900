// sti_event_encoder: spike-event encoder at the output of a layer ("Encode" in
// Fig. 8, spike event encoding of Sec. IV-E1).
//
// Input: H x W raster stream of C-bit spike vectors. Output: one event per vector
// that holds at least one spike, formatted {last, row, col, sv} with
// clog2(H) + clog2(W) + C bits plus the flag (the paper's log2(Hi) + log2(Wi) + Ci).
// All-zero vectors are dropped, which is where the sparsity of spikes saves
// transfer bandwidth. The last pixel of a frame is always sent, with last = 1, so
// the receiving decoder knows where the frame ends. Combinational: a vector is
// either forwarded in the cycle it is offered or dropped in that cycle. The
// end-of-frame flag is this design's addition. The spike-vector field of ev_data
// is in_sv wired straight through, so those bits show as outputs driven directly
// by inputs.
module sti_event_encoder
  import sti_pkg::*;
#(
  parameter int unsigned C = 64,
  parameter int unsigned H = 16,
  parameter int unsigned W = 16,
  localparam int unsigned EW = ev_w(C, H, W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [C-1:0]  in_sv,
  output logic          ev_valid,
  input  logic          ev_ready,
  output logic [EW-1:0] ev_data
);

  localparam int unsigned RW = clog2_min1(H);
  localparam int unsigned CW = clog2_min1(W);

  logic [RW-1:0] r_q;
  logic [CW-1:0] c_q;
  logic          is_last, send, adv;

  assign is_last  = (32'(r_q) == H - 1) && (32'(c_q) == W - 1);
  assign send     = (in_sv != '0) || is_last;
  assign ev_valid = in_valid && send;
  assign in_ready = send ? ev_ready : 1'b1;
  assign ev_data  = {is_last, r_q, c_q, in_sv};
  assign adv      = in_valid && in_ready;

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

endmodule
