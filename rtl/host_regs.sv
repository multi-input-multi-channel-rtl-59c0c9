// host_regs: local-bus register file between the USB microcontroller and the
// MCA inputs.
//
// The microcontroller sets the thresholds of each input, starts, stops and
// clears it, reads the last event maximum (which acknowledges the input's
// interrupt), the pulse counters and any bin of the spectrum. Address map
// (16-bit address, 32-bit data):
//   [15:14] input number, [13] broadcast: a write goes to every input,
//   [12] = 1: spectrum window, bin number in [9:0],
//   [12] = 0: register page, offset in [3:0]:
//     0 CTRL      W/R  bit0 run, bit1 clear (write 1, self-clearing)
//     1 LL        W/R  lower level            2 LLL     W/R lowest lower level
//     3 UL        W/R  upper level            4 MAXLEN  W/R max pulse length
//     5 STATUS    R    bit0 run, bit1 clearing, bit2 irq, bit3 busy
//     6 EVENT     R    last accepted maximum; the read lowers that input's irq
//     7 ACCEPTED  R    stored pulses          8 DISCARDED R rejected pulses
// Unused offsets read as zero. No setting is wider than 16 bits, so write data
// bits [31:16] are ignored.
//
// Bus timing: a write (lb_cs & lb_wr) takes effect at the clock edge that
// samples it. A read (lb_cs & lb_rd) returns lb_rdata with lb_rvalid one clock
// later, for registers and spectrum bins alike. `irq` is the OR of the
// inputs' interrupt flags. Reset values: stopped, LL = LLL = 0, UL = 4095,
// MAXLEN = 65535.
//
// A central control of the four inputs for thresholds, start, stop and clear
// follows the described system; the bus protocol, data width, address map,
// broadcast writes and reset values are this design's own choices.
module host_regs
  import mimca_pkg::*;
#(
  parameter int unsigned N_IN = N_INPUTS
) (
  input  logic             clk,
  input  logic             rst_n,
  // local bus
  input  logic             lb_cs,
  input  logic             lb_wr,
  input  logic             lb_rd,
  input  logic [LB_AW-1:0] lb_addr,
  input  logic [LB_DW-1:0] lb_wdata,
  output logic [LB_DW-1:0] lb_rdata,
  output logic             lb_rvalid,
  output logic             irq,
  // to and from the MCA inputs
  output pha_cfg_t         cfg         [N_IN],
  output logic             run         [N_IN],
  output logic             clear_start [N_IN],
  output logic             irq_ack     [N_IN],
  output logic [CH_W-1:0]  spec_addr,
  input  logic [CNT_W-1:0] spec_data   [N_IN],
  input  ch_status_t       status      [N_IN]
);

  localparam int unsigned SEL_W = LB_AW - A_INPUT_LSB;   // 2 bits, up to 4 inputs

  logic [SEL_W-1:0] sel;
  logic             bcast, spec_win;
  logic [3:0]       offs;
  logic             wr, rd;

  assign sel      = lb_addr[LB_AW-1 -: SEL_W];
  assign bcast    = lb_addr[A_BCAST];
  assign spec_win = lb_addr[A_SPECTRUM];
  assign offs     = lb_addr[3:0];
  assign wr       = lb_cs && lb_wr;
  assign rd       = lb_cs && lb_rd;
  assign spec_addr = lb_addr[CH_W-1:0];

  // Writes.
  for (genvar i = 0; i < N_IN; i++) begin : g_in
    logic hit;
    assign hit = wr && !spec_win && (bcast || sel == SEL_W'(i));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cfg[i].ll      <= '0;
        cfg[i].lll     <= '0;
        cfg[i].ul      <= '1;
        cfg[i].max_len <= '1;
        run[i]         <= 1'b0;
        clear_start[i] <= 1'b0;
      end else begin
        clear_start[i] <= 1'b0;
        if (hit) begin
          unique case (offs)
            REG_CTRL: begin
              run[i]         <= lb_wdata[0];
              clear_start[i] <= lb_wdata[1];
            end
            REG_LL:     cfg[i].ll      <= lb_wdata[ADC_W-1:0];
            REG_LLL:    cfg[i].lll     <= lb_wdata[ADC_W-1:0];
            REG_UL:     cfg[i].ul      <= lb_wdata[ADC_W-1:0];
            REG_MAXLEN: cfg[i].max_len <= lb_wdata[LEN_W-1:0];
            default: ;
          endcase
        end
      end
    end

    assign irq_ack[i] = rd && !spec_win && sel == SEL_W'(i) && offs == REG_EVENT;
  end

  // Register read value of the addressed input, captured at the request.
  logic [LB_DW-1:0] reg_rdata;
  always_comb begin
    reg_rdata = '0;
    for (int i = 0; i < N_IN; i++) begin
      if (sel == SEL_W'(i)) begin
        unique case (offs)
          REG_CTRL:      reg_rdata = LB_DW'(run[i]);
          REG_LL:        reg_rdata = LB_DW'(cfg[i].ll);
          REG_LLL:       reg_rdata = LB_DW'(cfg[i].lll);
          REG_UL:        reg_rdata = LB_DW'(cfg[i].ul);
          REG_MAXLEN:    reg_rdata = LB_DW'(cfg[i].max_len);
          REG_STATUS:    reg_rdata = LB_DW'({status[i].busy, status[i].irq,
                                             status[i].clearing, status[i].running});
          REG_EVENT:     reg_rdata = LB_DW'(status[i].event_max);
          REG_ACCEPTED:  reg_rdata = LB_DW'(status[i].accepted);
          REG_DISCARDED: reg_rdata = LB_DW'(status[i].discarded);
          default:       reg_rdata = '0;
        endcase
      end
    end
  end

  logic [LB_DW-1:0] reg_rdata_q;
  logic             spec_q;
  logic [SEL_W-1:0] sel_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lb_rvalid   <= 1'b0;
      reg_rdata_q <= '0;
      spec_q      <= 1'b0;
      sel_q       <= '0;
    end else begin
      lb_rvalid <= rd;
      if (rd) begin
        reg_rdata_q <= reg_rdata;
        spec_q      <= spec_win;
        sel_q       <= sel;
      end
    end
  end

  // Spectrum bins come straight from the memories' registered read ports.
  always_comb begin
    lb_rdata = reg_rdata_q;
    if (spec_q) begin
      lb_rdata = '0;
      for (int i = 0; i < N_IN; i++)
        if (sel_q == SEL_W'(i)) lb_rdata = LB_DW'(spec_data[i]);
    end
  end

  always_comb begin
    irq = 1'b0;
    for (int i = 0; i < N_IN; i++) irq |= status[i].irq;
  end

  // A read and a write are never requested in the same cycle.
  a_rd_xor_wr: assert property (@(posedge clk) disable iff (!rst_n)
                                lb_cs |-> !(lb_rd && lb_wr));

endmodule
