// sti_spike_gen: spike generation stage (the "Neuron") of one PE array (Fig. 8).
//
// It receives the NPE psums of a Kh x Kw PE array in the same cycle. In MODE_STD and
// MODE_DW an adder tree sums them (the paper reduces the partial-sum time T_pes with
// an addition tree) and the sum is registered (ctrl2). If en_vmem is set (the
// multi-timestep mode of Fig. 8(a)) the stored membrane potential vmem_in is added
// as well. One cycle later the potential is compared with vth (ctrl3): the neuron
// fires when V >= vth (integrate-and-fire, Table V "IF", reset to 0). vmem_out is
// the potential after firing (0 if it fired), for a membrane-potential buffer in the
// multi-timestep mode. In MODE_PW the neuron does not sum psums: psum[0] (the only
// PE of a 1x1 array) is compared with vth directly, in the cycle it arrives.
// spike_valid marks spike/vmem_out. The register and compare placement follow
// Fig. 8(a); bias is not modelled (Fig. 8 has no bias input).
module sti_spike_gen
  import sti_pkg::*;
#(
  parameter int unsigned NPE = 9
) (
  input  logic           clk,
  input  logic           rst_n,
  input  conv_mode_e     mode,
  input  acc_t           vth,
  input  logic           en_vmem,
  input  acc_t           vmem_in,
  input  acc_t           psum [NPE],
  input  logic           psum_valid,
  output logic           spike,
  output acc_t           vmem_out,
  output logic           spike_valid
);

  acc_t tree_sum, v_q, v_sel;
  logic v_valid_q;

  always_comb begin
    tree_sum = en_vmem ? vmem_in : '0;
    for (int i = 0; i < int'(NPE); i++) tree_sum += psum[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= '0;
      v_valid_q <= 1'b0;
    end else begin
      v_valid_q <= psum_valid && (mode != MODE_PW);
      if (psum_valid) v_q <= tree_sum;
    end
  end

  // Pointwise bypass: compare the PE's psum in the cycle it arrives.
  assign v_sel       = (mode == MODE_PW) ? psum[0] : v_q;
  assign spike_valid = (mode == MODE_PW) ? psum_valid : v_valid_q;
  assign spike       = (v_sel >= vth);
  assign vmem_out    = spike ? '0 : v_sel;

endmodule
