// trigger_fsm: the peak-finding trigger algorithm.
//
// One ADC sample arrives every clock. The machine follows each pulse of the
// majority-sum signal: a sample larger than the threshold starts a peak
// (PeakUp), the peak amplitude follows the rising edge, a falling sample that
// is still above threshold moves to PeakDown, and the first sample at or below
// threshold moves to Decide. In Decide the three event variables - number of
// peaks, accumulated time-over-threshold (ToT, in samples) and peak amplitude -
// are compared with their minima. If all pass and no discharge veto is
// active the machine enters Trigger for one cycle and then TriggerWait for
// trig_wait cycles. If the event's amplitude reached large_amp it then stays
// in AfterPulse until the input has been below threshold for ap_quiet
// consecutive cycles. If Decide does not pass, the machine waits up to
// peak_wait cycles (Wait) for another peak of the same event; when none comes
// the event is dropped and the machine returns to IDLE.
//
// Timing: the state register and the sample register (sample_q) load on the
// same edge, so in each cycle `state` is the classification of `sample_q`,
// exactly as the published timing diagram lines them up. trig_strobe is high
// in the Trigger cycle.
//
// From the published description: the state names and the transitions
// IDLE->PeakUp (above threshold), PeakUp->PeakUp (rising), PeakUp->PeakDown
// (falling, still above), ->Decide (below threshold), Decide->Wait,
// Wait->PeakUp, Trigger->TriggerWait->AfterPulse->IDLE, and that the three
// variables are compared with configured thresholds. This design's own
// choices: "rising" means strictly larger than the previous sample; a rise
// in PeakDown starts a new peak; Decide may go straight to PeakUp if its next
// sample is already above threshold; the amplitude compared is the largest
// peak of the event; ToT counts every above-threshold sample of the event;
// Wait times out to IDLE; all comparisons are "at least".
module trigger_fsm
  import trig_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  sample_t     sample,
  input  trig_cfg_t   cfg,
  input  logic        veto,
  output logic        above,
  output trig_state_e state,
  output sample_t     sample_q,
  output logic        trig_strobe,
  output count_t      npeaks,
  output time_t       tot,
  output sample_t     amp
);

  trig_state_e state_d;
  count_t      npeaks_d;
  time_t       tot_d, timer_q, timer_d;
  sample_t     amp_d;
  logic        cond_ok;
  logic        rising;
  time_t       tot_inc;

  assign above  = sample > cfg.threshold;
  assign rising = sample > sample_q;
  // ToT saturates rather than wrapping during very long pulse trains.
  assign tot_inc = (&tot) ? tot : tot + time_t'(1);

  // Trigger conditions, evaluated on the finished peak(s) while in Decide.
  assign cond_ok = (npeaks >= cfg.npeak_min) && (tot >= cfg.tot_min) &&
                   (amp >= cfg.amp_min);

  always_comb begin
    state_d  = state;
    npeaks_d = npeaks;
    tot_d    = tot;
    amp_d    = amp;
    timer_d  = timer_q;

    unique case (state)
      ST_IDLE: begin
        if (above) begin
          state_d  = ST_PEAKUP;
          npeaks_d = count_t'(1);
          tot_d    = time_t'(1);
          amp_d    = sample;
        end
      end

      ST_PEAKUP, ST_PEAKDOWN: begin
        if (!above) begin
          state_d = ST_DECIDE;
        end else begin
          tot_d = tot_inc;
          if (rising) begin
            state_d = ST_PEAKUP;
            if (state == ST_PEAKDOWN) npeaks_d = npeaks + count_t'(1);
            if (sample > amp) amp_d = sample;
          end else begin
            state_d = ST_PEAKDOWN;
          end
        end
      end

      ST_DECIDE: begin
        if (cond_ok && !veto) begin
          state_d = ST_TRIGGER;
        end else if (above) begin
          state_d  = ST_PEAKUP;
          npeaks_d = npeaks + count_t'(1);
          tot_d    = tot_inc;
          if (sample > amp) amp_d = sample;
        end else begin
          state_d = ST_WAIT;
          timer_d = time_t'(1);
        end
      end

      ST_WAIT: begin
        if (above) begin
          state_d  = ST_PEAKUP;
          npeaks_d = npeaks + count_t'(1);
          tot_d    = tot_inc;
          if (sample > amp) amp_d = sample;
        end else if (timer_q >= cfg.peak_wait) begin
          state_d = ST_IDLE;
        end else begin
          timer_d = timer_q + time_t'(1);
        end
      end

      ST_TRIGGER: begin
        state_d = ST_TRIGWAIT;
        timer_d = time_t'(1);
      end

      ST_TRIGWAIT: begin
        if (timer_q >= cfg.trig_wait) begin
          if (amp >= cfg.large_amp) begin
            state_d = ST_AFTERPULSE;
            timer_d = above ? time_t'(0) : time_t'(1);
          end else begin
            state_d = ST_IDLE;
          end
        end else begin
          timer_d = timer_q + time_t'(1);
        end
      end

      ST_AFTERPULSE: begin
        if (above) begin
          timer_d = '0;
        end else if (timer_q >= cfg.ap_quiet) begin
          state_d = ST_IDLE;
        end else begin
          timer_d = timer_q + time_t'(1);
        end
      end

      default: state_d = ST_IDLE;
    endcase

    // Leaving an event clears its variables.
    if (state_d == ST_IDLE) begin
      npeaks_d = '0;
      tot_d    = '0;
      amp_d    = '0;
      timer_d  = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      sample_q <= '0;
      npeaks   <= '0;
      tot      <= '0;
      amp      <= '0;
      timer_q  <= '0;
    end else begin
      state    <= state_d;
      sample_q <= sample;
      npeaks   <= npeaks_d;
      tot      <= tot_d;
      amp      <= amp_d;
      timer_q  <= timer_d;
    end
  end

  assign trig_strobe = (state == ST_TRIGGER);

  // A trigger is only ever issued from Decide, and never under veto.
  a_trig_from_decide: assert property (@(posedge clk) disable iff (!rst_n)
    (state_d == ST_TRIGGER && state != ST_TRIGGER) |-> (state == ST_DECIDE && !veto));

endmodule
