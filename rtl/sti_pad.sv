// sti_pad: zero padding of a spike-vector stream (the PAD stage of Fig. 5).
//
// The input is an H x W raster stream of C-bit spike vectors; the output is the
// (H+2*PAD) x (W+2*PAD) raster stream with all-zero vectors around the border.
// Border positions are produced without consuming input; interior positions pass
// the input through combinationally (valid/ready handshakes on both sides). The
// paper only names the stage; the pass-through structure is this design's choice.
// With PAD = 0 the stream passes unchanged.
module sti_pad #(
  parameter int unsigned C   = 64,
  parameter int unsigned H   = 16,
  parameter int unsigned W   = 16,
  parameter int unsigned PAD = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [C-1:0] in_sv,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [C-1:0] out_sv
);

  localparam int unsigned HO = H + 2 * PAD;
  localparam int unsigned WO = W + 2 * PAD;
  localparam int unsigned RW = (HO <= 2) ? 1 : $clog2(HO);
  localparam int unsigned CW = (WO <= 2) ? 1 : $clog2(WO);

  logic [RW-1:0] r_q;
  logic [CW-1:0] c_q;
  logic          border, adv;

  assign border    = (32'(r_q) < PAD) || (32'(r_q) >= H + PAD) ||
                     (32'(c_q) < PAD) || (32'(c_q) >= W + PAD);
  assign out_valid = border ? 1'b1 : in_valid;
  assign out_sv    = border ? '0 : in_sv;
  assign in_ready  = border ? 1'b0 : out_ready;
  assign adv       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q <= '0;
      c_q <= '0;
    end else if (adv) begin
      if (32'(c_q) == WO - 1) begin
        c_q <= '0;
        r_q <= (32'(r_q) == HO - 1) ? '0 : r_q + 1'b1;
      end else begin
        c_q <= c_q + 1'b1;
      end
    end
  end

endmodule
