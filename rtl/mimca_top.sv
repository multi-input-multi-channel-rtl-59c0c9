// mimca_top: multi-input multi-channel analyzer, four MCA inputs behind one
// microcontroller bus.
//
// Each input has its own ADC sample bus (`adc_data[i]`, one 12-bit sample per
// clock) feeding an mca_channel: pulse height detector, 1024-bin spectrum and
// event register. A host_regs block decodes the microcontroller's local bus
// and gives central control of all inputs: thresholds, start, stop, clear,
// event and spectrum readout. `irq` is high while any input holds an unread
// event. The ADCs and the microcontroller are outside this module; their
// signals are its ports. All logic runs on the ADC sample clock.
//
// Four inputs with 1024-channel spectra and a single central control follow
// the described system; the shared clock, the bus and the register map (see
// host_regs) are this design's own choices.
module mimca_top
  import mimca_pkg::*;
#(
  parameter int unsigned N_IN = N_INPUTS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ADC_W-1:0] adc_data [N_IN],
  input  logic             lb_cs,
  input  logic             lb_wr,
  input  logic             lb_rd,
  input  logic [LB_AW-1:0] lb_addr,
  input  logic [LB_DW-1:0] lb_wdata,
  output logic [LB_DW-1:0] lb_rdata,
  output logic             lb_rvalid,
  output logic             irq
);

  pha_cfg_t         cfg         [N_IN];
  logic             run         [N_IN];
  logic             clear_start [N_IN];
  logic             irq_ack     [N_IN];
  logic [CH_W-1:0]  spec_addr;
  logic [CNT_W-1:0] spec_data   [N_IN];
  ch_status_t       status      [N_IN];

  host_regs #(.N_IN(N_IN)) u_regs (
    .clk, .rst_n,
    .lb_cs, .lb_wr, .lb_rd, .lb_addr, .lb_wdata, .lb_rdata, .lb_rvalid, .irq,
    .cfg, .run, .clear_start, .irq_ack, .spec_addr, .spec_data, .status
  );

  for (genvar i = 0; i < N_IN; i++) begin : g_ch
    mca_channel u_ch (
      .clk, .rst_n,
      .sample      (adc_data[i]),
      .cfg         (cfg[i]),
      .run         (run[i]),
      .clear_start (clear_start[i]),
      .irq_ack     (irq_ack[i]),
      .rd_addr     (spec_addr),
      .rd_data     (spec_data[i]),
      .status      (status[i])
    );
  end

endmodule
