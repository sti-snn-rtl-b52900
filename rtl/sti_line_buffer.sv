// sti_line_buffer: line buffer of a convolution layer (Fig. 6(a), Fig. 7(a)).
//
// K-1 FIFOs of depth W (the padded input width) and width CI (one spike vector)
// are chained tail to head. On every push, the incoming vector enters the last
// FIFO, each FIFO's head moves into the tail of the next one, and the K vectors of
// one image column are offered on col: col[K-1] is the pushed vector (the row being
// received), col[k] is the vector pushed (K-1-k)*W pushes earlier. These feed the
// K PE rows. col is valid in the cycle of the push (combinational from the
// storage), so the PE rows shift it in on the same edge. The incoming row reaches
// the bottom PE row without a FIFO, as in Fig. 6(a); hence K-1 FIFOs, the "Kh-1"
// of Fig. 7(a), although the text counts Kh. Storage is not reset: positions are
// only read after they have been written during a frame. A frame has a whole
// number of rows, so the pointer is back at 0 when the next frame begins.
// Because col[K-1] is din itself, its bits are outputs driven straight from an
// input; that wire is the direct path to the bottom PE row, not an oversight.
module sti_line_buffer #(
  parameter int unsigned CI = 64,
  parameter int unsigned W  = 18,
  parameter int unsigned K  = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [CI-1:0] din,
  output logic [CI-1:0] col [K]
);

  localparam int unsigned AW = (W <= 2) ? 1 : $clog2(W);

  logic [AW-1:0] ptr_q;

  if (K > 1) begin : g_fifo
    logic [CI-1:0] mem [K-1][W];

    always_comb begin
      for (int k = 0; k < int'(K) - 1; k++) col[k] = mem[k][ptr_q];
      col[K-1] = din;
    end

    always_ff @(posedge clk) begin
      if (push) begin
        for (int k = 0; k < int'(K) - 2; k++) mem[k][ptr_q] <= mem[k+1][ptr_q];
        mem[K-2][ptr_q] <= din;
      end
    end
  end else begin : g_direct
    assign col[0] = din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ptr_q <= '0;
    else if (push) ptr_q <= (32'(ptr_q) == W - 1) ? '0 : ptr_q + 1'b1;
  end

endmodule
