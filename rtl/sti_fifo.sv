// sti_fifo: synchronous FIFO buffer between two pipeline layers (Sec. IV-E1).
//
// The producer raises in_valid (request) and the FIFO answers with in_ready
// (response); a word moves when both are high, likewise on the output side. This
// is the request-response synchronisation the paper uses so that a fast layer can
// neither lose data nor overrun a slow one. DEPTH words of WIDTH bits; out_data
// is the head word, valid whenever out_valid is high (first-word fall-through).
// Assertions check that a pending request is held stable until it is taken.
// The per-layer depths are this design's choice; the paper sizes them per layer
// without giving numbers.
module sti_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp_q, rp_q;
  logic             wr, rd;

  assign in_ready  = (32'(count) < DEPTH);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp_q];
  assign wr        = in_valid && in_ready;
  assign rd        = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (wr) mem[wp_q] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      count <= '0;
    end else begin
      if (wr) wp_q <= (32'(wp_q) == DEPTH - 1) ? '0 : wp_q + 1'b1;
      if (rd) rp_q <= (32'(rp_q) == DEPTH - 1) ? '0 : rp_q + 1'b1;
      if (wr && !rd)      count <= count + 1'b1;
      else if (rd && !wr) count <= count - 1'b1;
    end
  end

  // Request-response rules: a request waiting for its response stays unchanged.
  logic             pend_q;
  logic [WIDTH-1:0] pend_data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q      <= 1'b0;
      pend_data_q <= '0;
    end else begin
      pend_q      <= in_valid && !in_ready;
      pend_data_q <= in_data;
      if (pend_q) begin
        assert (in_valid) else $error("sti_fifo: request withdrawn before response");
        assert (in_data == pend_data_q) else $error("sti_fifo: request data changed while waiting");
      end
    end
  end

endmodule
