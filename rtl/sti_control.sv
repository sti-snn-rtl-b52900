// sti_control: control module of the accelerator (Fig. 5).
//
// It sits between the host bus (which in the FPGA system arrives from the ARM
// processor over AXI) and the layers. A host write carries a target select, a
// bank, an address and a data word:
//   * sel < NT          write a weight word into the weight buffer of target sel
//                       (conv layers 0..NT-2, the fc layer NT-1): we_o[sel] pulses,
//                       bank/addr/data are forwarded registered, one cycle later.
//   * sel == SEL_VTH    write the firing threshold of conv layer `addr` (registered,
//                       visible on vth the next cycle).
//   * sel == SEL_START  enable streaming (run = 1); data bit 0 = 0 stops it.
// It also counts frames entering (in_frame) and results leaving (out_frame) and
// reports frames in flight and a busy flag. The paper only names the module; this
// register map is this design's choice. Thresholds reset to 1.
module sti_control
  import sti_pkg::*;
#(
  parameter int unsigned NT     = 5,    // weight targets: 4 conv layers + fc
  parameter int unsigned NL     = 4,    // layers with a threshold
  parameter int unsigned AW     = 20,
  parameter int unsigned BW     = 2,
  parameter int unsigned DATA_W = 80
) (
  input  logic              clk,
  input  logic              rst_n,
  // host write bus
  input  logic              host_we,
  input  logic [3:0]        host_sel,
  input  logic [BW-1:0]     host_bank,
  input  logic [AW-1:0]     host_addr,
  input  logic [DATA_W-1:0] host_data,
  // to layers
  output logic [NT-1:0]     we_o,
  output logic [BW-1:0]     bank_o,
  output logic [AW-1:0]     addr_o,
  output logic [DATA_W-1:0] data_o,
  output acc_t              vth [NL],
  output logic              run,
  // frame bookkeeping
  input  logic              in_frame,
  input  logic              out_frame,
  output logic [15:0]       frames_in,
  output logic [15:0]       frames_out,
  output logic              busy
);

  localparam logic [3:0] SEL_VTH   = 4'hE;
  localparam logic [3:0] SEL_START = 4'hF;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we_o       <= '0;
      bank_o     <= '0;
      addr_o     <= '0;
      data_o     <= '0;
      run        <= 1'b0;
      frames_in  <= '0;
      frames_out <= '0;
      for (int l = 0; l < int'(NL); l++) vth[l] <= acc_t'(1);
    end else begin
      we_o <= '0;
      if (host_we) begin
        if (32'(host_sel) < NT) begin
          for (int t = 0; t < int'(NT); t++)
            if (32'(host_sel) == t) we_o[t] <= 1'b1;
          bank_o         <= host_bank;
          addr_o         <= host_addr;
          data_o         <= host_data;
        end else if (host_sel == SEL_VTH) begin
          for (int l = 0; l < int'(NL); l++)
            if (32'(host_addr) == l) vth[l] <= acc_t'(signed'(host_data[ACC_W-1:0]));
        end else if (host_sel == SEL_START) begin
          run <= host_data[0];
        end
      end
      if (in_frame)  frames_in  <= frames_in + 1'b1;
      if (out_frame) frames_out <= frames_out + 1'b1;
    end
  end

  assign busy = (frames_in != frames_out);

endmodule
