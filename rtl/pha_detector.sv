// pha_detector: pulse height analysis for one ADC input.
//
// One ADC sample arrives per clock. While idle and running, the detector
// waits for a sample greater than the lower level LL. It then samples the
// pulse, keeping the largest sample seen (the pulse maximum) and counting
// the samples taken, until a sample is lower than the lowest lower level LLL
// or more than MAX_LEN samples have been taken. In the following cycle
// (DECIDE) the maximum is compared with the upper level UL: a maximum above
// UL, or an overlong pulse, gives a one-cycle `discard` strobe; otherwise a
// one-cycle `event_valid` strobe carries the maximum on `event_max`.
//
// Timing: for a pulse whose first sample above LL arrives in cycle t and whose
// first sample below LLL arrives in cycle t+n, the strobe is raised in cycle
// t+n+1 (registered output). The sample arriving during DECIDE is not looked
// at, so two pulses need at least one sample between them.
//
// The arm/track/end/compare sequence, the four thresholds and the strict
// comparisons ("greater than LL", "lower than LLL", "more than sMaxPulsLen",
// "greater than UL") follow the described algorithm. The separate DECIDE
// cycle, the WAIT_LOW state that keeps an overlong pulse from re-arming the
// detector while it is still above LL, and the rule that `run` only gates
// the arming of a new pulse are this design's own choices.
module pha_detector
  import mimca_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic [ADC_W-1:0] sample,
  input  pha_cfg_t         cfg,
  output logic             event_valid,
  output logic             discard,
  output logic [ADC_W-1:0] event_max,
  output logic             busy
);

  pha_state_t       state;
  logic [ADC_W-1:0] peak_max;   // running maximum of the pulse
  logic [LEN_W:0]   len;        // samples taken, one bit wider than max_len
  logic             too_long;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= PHA_IDLE;
      peak_max    <= '0;
      len         <= '0;
      too_long    <= 1'b0;
      event_valid <= 1'b0;
      discard     <= 1'b0;
      event_max   <= '0;
    end else begin
      event_valid <= 1'b0;
      discard     <= 1'b0;
      unique case (state)
        PHA_IDLE: begin
          if (run && sample > cfg.ll) begin
            state    <= PHA_SAMPLING;
            peak_max <= sample;
            len      <= (LEN_W+1)'(1);
            too_long <= 1'b0;
          end
        end
        PHA_SAMPLING: begin
          if (sample < cfg.lll) begin
            state <= PHA_DECIDE;                 // pulse has ended
          end else begin
            if (sample > peak_max) peak_max <= sample;
            len <= len + 1'b1;
            if (len + 1'b1 > {1'b0, cfg.max_len}) begin
              too_long <= 1'b1;
              state    <= PHA_DECIDE;
            end
          end
        end
        PHA_DECIDE: begin
          event_max <= peak_max;
          if (too_long || peak_max > cfg.ul) discard <= 1'b1;
          else                               event_valid <= 1'b1;
          state <= too_long ? PHA_WAIT_LOW : PHA_IDLE;
        end
        PHA_WAIT_LOW: begin
          if (sample < cfg.lll) state <= PHA_IDLE;
        end
        default: state <= PHA_IDLE;
      endcase
    end
  end

  assign busy = (state != PHA_IDLE);

  // An accepted pulse and a discarded pulse are never reported together.
  a_one_outcome: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(event_valid && discard));
  // An accepted maximum never exceeds the upper level it was checked against.
  a_below_ul: assert property (@(posedge clk) disable iff (!rst_n)
                               event_valid |-> event_max <= $past(cfg.ul));

endmodule
