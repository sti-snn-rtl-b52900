// sti_genspk: output feed-forward stage, "GenSpk" of Fig. 8.
//
// The P PE arrays of a convolution layer produce the spikes of output channels
// g*P + p (lane p, channel group g) in group order. Every cycle with spike_valid,
// the P spike bits are written into the output spike vector at the current group
// and the group counter advances. When the last of the CO/P groups has arrived the
// complete vector is presented on sv_out with done (ctrl4) for one cycle, and the
// collector is ready for the next output pixel. clear restarts the collection.
// The counter-based bit placement is this design's choice; the paper names only
// the function. Its overview figure draws a shift ("<<") ahead of spike output.
// Writing each bit at its position builds the same vector without a shifter.
module sti_genspk #(
  parameter int unsigned CO = 128,
  parameter int unsigned P  = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic [P-1:0]  spike,
  input  logic          spike_valid,
  output logic [CO-1:0] sv_out,
  output logic          done
);

  localparam int unsigned NG = CO / P;
  localparam int unsigned GW = (NG <= 2) ? 1 : $clog2(NG);

  logic [GW-1:0] grp_q;
  logic [CO-1:0] vec_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_q  <= '0;
      vec_q  <= '0;
      sv_out <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        grp_q <= '0;
        vec_q <= '0;
      end else if (spike_valid) begin
        if (32'(grp_q) == NG - 1) begin
          grp_q  <= '0;
          vec_q  <= '0;
          sv_out <= vec_q;
          for (int p = 0; p < int'(P); p++) sv_out[32'(grp_q)*P + p] <= spike[p];
          done   <= 1'b1;
        end else begin
          grp_q <= grp_q + 1'b1;
          for (int p = 0; p < int'(P); p++) vec_q[32'(grp_q)*P + p] <= spike[p];
        end
      end
    end
  end

  initial begin
    assert (CO % P == 0) else $error("sti_genspk: CO must be a multiple of P");
  end

endmodule
