// sti_pe: one processing element of the convolution systolic array (spike
// accumulation stage of Fig. 8).
//
// The PE holds one input spike vector: the spikes of all CI input channels at one
// pixel, in channel order. On sv_shift it takes the vector of its right-hand
// neighbour (or of the line buffer, for the rightmost PE); sv_q feeds the left-hand
// neighbour. Every cycle with w_valid, the broadcast weight is applied to the spike
// bit sv_q[index]:
//   * MODE_STD / MODE_PW: the weight is added to the internal membrane-potential
//     register when the bit is 1. With `last` (ctrl1) the sum including this
//     cycle's weight appears on psum one cycle later and the register clears, so a
//     new accumulation can start in the next cycle without a bubble.
//   * MODE_DW: nothing is accumulated; the weight (or 0 when the bit is 0) is put
//     on psum one cycle later for every w_valid.
// psum_valid marks a registered psum. Mode multiplexers, the zero comparator and
// the accumulator follow Fig. 8(a); the one-cycle output register is this design's
// choice. Reset is asynchronous and active-low.
module sti_pe
  import sti_pkg::*;
#(
  parameter int unsigned CI = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  conv_mode_e                mode,
  input  logic                      sv_shift,
  input  logic [CI-1:0]             sv_in,
  output logic [CI-1:0]             sv_q,
  input  logic                      w_valid,
  input  logic [clog2_min1(CI)-1:0] index,
  input  wgt_t                      weight,
  input  logic                      last,
  output acc_t                      psum,
  output logic                      psum_valid
);

  acc_t acc_q, sel, acc_next;
  logic spike;

  assign spike    = sv_q[index];
  assign sel      = (spike != 1'b0) ? acc_t'(weight) : '0;
  assign acc_next = acc_q + sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sv_q       <= '0;
      acc_q      <= '0;
      psum       <= '0;
      psum_valid <= 1'b0;
    end else begin
      if (sv_shift) sv_q <= sv_in;
      psum_valid <= 1'b0;
      if (w_valid) begin
        if (mode == MODE_DW) begin
          psum       <= sel;
          psum_valid <= 1'b1;
        end else if (last) begin
          psum       <= acc_next;
          psum_valid <= 1'b1;
          acc_q      <= '0;
        end else begin
          acc_q <= acc_next;
        end
      end
    end
  end

endmodule
