// mca_channel: one complete MCA input.
//
// A pha_detector measures each pulse on the input's ADC samples. An accepted
// pulse maximum (12 bit) is mapped to one of the 1024 spectrum bins by
// dropping its two least significant bits, and that bin of the
// spectrum_memory is incremented. The same maximum is latched in an event
// register that raises `irq` for the microcontroller; `irq_ack` (the host
// reading the event register) lowers it again. A newer event overwrites an
// unread one. Two counters count the stored and the rejected pulses; they
// give the "sum of pulses" the host shows and, sampled over time, the rate.
//
// `clear_start` empties the spectrum (1024 clocks, see spectrum_memory) and
// zeroes both counters; pulses accepted while the sweep runs are neither
// stored nor counted. Event-to-bin latency: the bin is written two clocks
// after `event_valid`; `irq` and the counters update one clock after it.
//
// The detector, the interrupt to the microcontroller carrying the pulse
// maximum, the 1024-bin spectrum and the pulse sum follow the described
// system. The bin mapping, the discard counter, overwrite of unread events
// and the clear behaviour are this design's own choices.
module mca_channel
  import mimca_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ADC_W-1:0] sample,
  input  pha_cfg_t         cfg,
  input  logic             run,
  input  logic             clear_start,
  input  logic             irq_ack,
  input  logic [CH_W-1:0]  rd_addr,
  output logic [CNT_W-1:0] rd_data,
  output ch_status_t       status
);

  logic             ev_valid, ev_discard, pha_busy;
  logic [ADC_W-1:0] ev_max;
  logic             clearing;
  logic             irq_q;
  logic [ADC_W-1:0] event_q;
  logic [CNT_W-1:0] accepted_q, discarded_q;

  pha_detector u_pha (
    .clk, .rst_n, .run, .sample, .cfg,
    .event_valid (ev_valid),
    .discard     (ev_discard),
    .event_max   (ev_max),
    .busy        (pha_busy)
  );

  spectrum_memory #(.CH_W(CH_W), .CNT_W(CNT_W)) u_spec (
    .clk, .rst_n,
    .inc_valid   (ev_valid),
    .inc_bin     (ev_max[ADC_W-1 -: CH_W]),
    .clear_start,
    .clearing,
    .rd_addr,
    .rd_data
  );

  logic stored;
  assign stored = ev_valid && !clearing && !clear_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq_q       <= 1'b0;
      event_q     <= '0;
      accepted_q  <= '0;
      discarded_q <= '0;
    end else begin
      if (clear_start) begin
        accepted_q  <= '0;
        discarded_q <= '0;
        irq_q       <= 1'b0;
      end else begin
        if (stored) begin
          event_q <= ev_max;
          irq_q   <= 1'b1;
          if (!(&accepted_q)) accepted_q <= accepted_q + 1'b1;
        end else if (irq_ack) begin
          irq_q <= 1'b0;
        end
        if (ev_discard && !clearing && !(&discarded_q))
          discarded_q <= discarded_q + 1'b1;
      end
    end
  end

  always_comb begin
    status.running   = run;
    status.clearing  = clearing;
    status.busy      = pha_busy;
    status.irq       = irq_q;
    status.event_max = event_q;
    status.accepted  = accepted_q;
    status.discarded = discarded_q;
  end

endmodule
