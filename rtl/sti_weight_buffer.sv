// sti_weight_buffer: on-chip weight buffer of one convolution layer (Fig. 5).
//
// One bank per output-channel lane (P banks). A word holds the K*K int8 weights of
// one (output channel, input channel) pair, weight (kh, kw) in bits
// [(kh*K+kw)*8 +: 8]; the whole word is broadcast to the K x K PEs of the lane in
// one cycle, as the OS dataflow of Fig. 6(c) requires. Bank p holds output
// channels p, p+P, p+2P, ...; address = group*CI + input channel (standard and
// pointwise) or group (depthwise). All banks are read at the same address; data
// appear one cycle after rd_en (block RAM timing). A single write port loads the
// weights from the host. The bank organisation is this design's choice.
module sti_weight_buffer #(
  parameter int unsigned P      = 4,
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned WORD_W = 72
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [((P <= 2) ? 1 : $clog2(P))-1:0] wbank,
  input  logic [((DEPTH <= 2) ? 1 : $clog2(DEPTH))-1:0] waddr,
  input  logic [WORD_W-1:0]         wdata,
  input  logic                      rd_en,
  input  logic [((DEPTH <= 2) ? 1 : $clog2(DEPTH))-1:0] raddr,
  output logic [WORD_W-1:0]         rdata [P]
);

  for (genvar p = 0; p < int'(P); p++) begin : g_bank
    logic [WORD_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && 32'(wbank) == p) mem[waddr] <= wdata;
      if (rd_en) rdata[p] <= mem[raddr];
    end
  end

endmodule
