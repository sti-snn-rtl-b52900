// sti_fc: fully connected output layer (the final "fc" of the evaluated models).
//
// The input is the dense raster stream of C-bit spike vectors of the last H x W
// feature map, flattened in the order (row, col, channel): input neuron
// n = (row*W + col)*C + channel. The layer keeps NCLS class potentials. Every
// non-zero input vector is scanned one channel per cycle; for each channel whose
// spike is 1 the weights W[n][0..NCLS-1] (one word of NCLS int8 weights) are added
// to all class potentials in parallel. All-zero vectors are consumed in one cycle
// (event-driven). After the frame's last vector the potentials and the index of
// the largest one (lowest index on a tie) are presented with res_valid, and the
// potentials clear for the next frame. The paper gives only the layer's place in
// the models; this structure, the argmax read-out and the weight order are this
// design's choices.
module sti_fc
  import sti_pkg::*;
#(
  parameter int unsigned C    = 512,
  parameter int unsigned H    = 1,
  parameter int unsigned W    = 1,
  parameter int unsigned NCLS = 10,
  localparam int unsigned NIN  = H * W * C,
  localparam int unsigned AW   = (NIN <= 2) ? 1 : $clog2(NIN),
  localparam int unsigned CLW  = (NCLS <= 2) ? 1 : $clog2(NCLS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  w_we,
  input  logic [AW-1:0]         w_addr,
  input  logic [NCLS*WGT_W-1:0] w_data,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [C-1:0]          in_sv,
  output logic                  res_valid,
  output acc_t                  score [NCLS],
  output logic [CLW-1:0]        cls
);

  localparam int unsigned PW = (H * W <= 2) ? 1 : $clog2(H * W);
  localparam int unsigned IW = clog2_min1(C);

  logic [NCLS*WGT_W-1:0] wmem [NIN];
  logic [NCLS*WGT_W-1:0] wrd;
  logic [PW-1:0] pos_q;
  logic [IW-1:0] ch_q;
  logic [C-1:0]  sv_q;
  logic          scan_q, last_pos_q;
  logic          acc_v_q, acc_last_q;
  acc_t          pot_q [NCLS];
  acc_t          nxt [NCLS];
  logic [CLW-1:0] best;

  always_comb begin
    for (int j = 0; j < int'(NCLS); j++)
      nxt[j] = pot_q[j] + (acc_v_q ? acc_t'(wgt_t'(wrd[j*WGT_W +: WGT_W])) : acc_t'(0));
    best = '0;
    for (int j = 1; j < int'(NCLS); j++)
      if (nxt[j] > nxt[best]) best = CLW'(j);
  end

  assign in_ready = !scan_q;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
    wrd <= wmem[AW'(32'(pos_q) * C + 32'(ch_q))];
  end

  // scanning: one channel per cycle, a weight read for every spike
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos_q      <= '0;
      ch_q       <= '0;
      sv_q       <= '0;
      scan_q     <= 1'b0;
      last_pos_q <= 1'b0;
      acc_v_q    <= 1'b0;
      acc_last_q <= 1'b0;
    end else begin
      acc_v_q    <= 1'b0;
      acc_last_q <= 1'b0;
      if (!scan_q) begin
        if (in_valid) begin
          last_pos_q <= (32'(pos_q) == H * W - 1);
          if (in_sv != '0) begin
            scan_q <= 1'b1;
            sv_q   <= in_sv;
            ch_q   <= '0;
          end else begin
            acc_last_q <= (32'(pos_q) == H * W - 1);
            pos_q      <= (32'(pos_q) == H * W - 1) ? '0 : pos_q + 1'b1;
          end
        end
      end else begin
        acc_v_q <= sv_q[ch_q];
        if (32'(ch_q) == C - 1) begin
          scan_q     <= 1'b0;
          acc_last_q <= last_pos_q;
          pos_q      <= last_pos_q ? '0 : pos_q + 1'b1;
        end else begin
          ch_q <= ch_q + 1'b1;
        end
      end
    end
  end

  // accumulation one cycle behind the scan (weight read latency)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(NCLS); j++) begin
        pot_q[j] <= '0;
        score[j] <= '0;
      end
      res_valid <= 1'b0;
      cls       <= '0;
    end else begin
      res_valid <= 1'b0;
      begin
        if (acc_last_q) begin
          for (int j = 0; j < int'(NCLS); j++) begin
            score[j] <= nxt[j];
            pot_q[j] <= '0;
          end
          cls       <= best;
          res_valid <= 1'b1;
        end else begin
          for (int j = 0; j < int'(NCLS); j++) pot_q[j] <= nxt[j];
        end
      end
    end
  end

endmodule
