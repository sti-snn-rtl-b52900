// sti_pool: 2x2, stride-2 spike pooling (Fig. 7(b)).
//
// Input and output are raster streams of spike vectors (C bits, all channels of
// one pixel) with valid/ready handshakes. Spike pooling is the logical OR of the
// four vectors of each 2x2 block, as in the paper. A line buffer of depth W (the
// input width, as the paper requires) keeps the even row; a register keeps the
// previous pixel of the odd row. At every odd column of an odd row the OR of
// rowbuf[c-1], rowbuf[c], the held pixel and the incoming pixel is output, one
// cycle after the input handshake. An odd last row or column is dropped (floor).
// Fig. 7(b) moves the data between two register banks; this design reads the same
// four operands from the row buffer and one register, which gives the same result.
module sti_pool #(
  parameter int unsigned C = 64,
  parameter int unsigned H = 32,
  parameter int unsigned W = 32
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

  localparam int unsigned RW = (H <= 2) ? 1 : $clog2(H);
  localparam int unsigned CW = (W <= 2) ? 1 : $clog2(W);

  logic [RW-1:0] r_q;
  logic [CW-1:0] c_q;
  logic [C-1:0]  rowbuf [W];
  logic [C-1:0]  prev_q;
  logic          fire, odd_row, odd_col, emit;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign odd_row  = r_q[0];
  assign odd_col  = c_q[0];
  assign emit     = odd_row && odd_col && (32'(r_q) < (H / 2) * 2) && (32'(c_q) < (W / 2) * 2);

  always_ff @(posedge clk) begin
    if (fire && !odd_row) rowbuf[c_q] <= in_sv;
    if (fire && odd_row && !odd_col) prev_q <= in_sv;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q       <= '0;
      c_q       <= '0;
      out_valid <= 1'b0;
      out_sv    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (emit) begin
          out_valid <= 1'b1;
          out_sv    <= rowbuf[c_q - 1'b1] | rowbuf[c_q] | prev_q | in_sv;
        end
        if (32'(c_q) == W - 1) begin
          c_q <= '0;
          r_q <= (32'(r_q) == H - 1) ? '0 : r_q + 1'b1;
        end else begin
          c_q <= c_q + 1'b1;
        end
      end
    end
  end

endmodule
