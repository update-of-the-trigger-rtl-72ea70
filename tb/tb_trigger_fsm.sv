// tb_trigger_fsm: self-checking test of the peak-finding state machine.
//
// 1. Replays the published three-peak example sample by sample (baseline 51,
//    threshold 68) and checks the state of every cycle against the sequence
//    printed in the timing diagram: IDLE IDLE PeakUp PeakUp PeakDown Decide
//    Wait PeakUp PeakDown Decide Wait PeakUp PeakDown Decide Trigger
//    TriggerWait, with the event variables (3 peaks, ToT 7 samples,
//    amplitude 198) checked at the third Decide.
// 2. Checks that TriggerWait lasts exactly trig_wait cycles and that a small
//    event then returns to IDLE.
// 3. Checks that a Wait with no new peak times out to IDLE after peak_wait
//    cycles and clears the event.
// 4. Checks the AfterPulse state after a large peak: it ends only after
//    ap_quiet consecutive quiet cycles, and restarts its count on a
//    re-crossing.
// 5. Checks that the veto input blocks Decide -> Trigger.
module tb_trigger_fsm;
  import trig_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n;
  sample_t     sample;
  trig_cfg_t   cfg;
  logic        veto;
  logic        above, trig_strobe;
  trig_state_e state;
  sample_t     sample_q, amp;
  count_t      npeaks;
  time_t       tot;

  int checks = 0;
  int failures = 0;

  trigger_fsm dut (.*);

  always #10 clk = ~clk;   // 20 ns period

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (state=%s sample_q=%0d)", what, state.name(), sample_q);
    end
  endtask

  // Apply one sample; after the edge, state/sample_q describe it.
  task automatic step(input int s);
    sample = sample_t'(s);
    @(posedge clk);
    #1;
  endtask

  // Published example (timing diagram columns 1..15) and its state row.
  int          fig_data [15] = '{51, 51, 145, 189, 100, 52, 53, 192, 145, 55,
                                 51, 198, 154, 62, 51};
  trig_state_e fig_state[15] = '{ST_IDLE, ST_IDLE, ST_PEAKUP, ST_PEAKUP,
                                 ST_PEAKDOWN, ST_DECIDE, ST_WAIT, ST_PEAKUP,
                                 ST_PEAKDOWN, ST_DECIDE, ST_WAIT, ST_PEAKUP,
                                 ST_PEAKDOWN, ST_DECIDE, ST_TRIGGER};

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    cfg = CFG_DEFAULT;
    cfg.trig_wait = 24'd40;
    cfg.peak_wait = 24'd10;
    cfg.ap_quiet  = 24'd20;
    cfg.large_amp = 12'd1000;
    veto   = 1'b0;
    sample = 12'd51;
    rst_n  = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---- 1: published example
    foreach (fig_data[i]) begin
      step(fig_data[i]);
      check(state == fig_state[i], $sformatf("example column %0d", i + 1));
      if (i == 13) begin
        check(npeaks == 16'd3, "three peaks at the third Decide");
        check(tot == 24'd7, "ToT 7 samples at the third Decide");
        check(amp == 12'd198, "amplitude 198 at the third Decide");
      end
      check(trig_strobe == (fig_state[i] == ST_TRIGGER), "strobe only in Trigger");
    end

    // ---- 2: TriggerWait length
    n = 0;
    do begin
      step(51);
      if (state == ST_TRIGWAIT) n++;
    end while (state == ST_TRIGWAIT && n < 1000);
    check(n == 40, $sformatf("TriggerWait lasted %0d cycles, expected 40", n));
    check(state == ST_IDLE, "small event returns to IDLE after TriggerWait");
    check(npeaks == 0 && tot == 0 && amp == 0, "event cleared in IDLE");

    // ---- 3: one small peak, Wait times out
    step(100); check(state == ST_PEAKUP, "single peak up");
    step(60);  check(state == ST_DECIDE, "single peak decide");
    check(npeaks == 1 && tot == 1, "one peak, ToT 1");
    n = 0;
    do begin
      step(51);
      if (state == ST_WAIT) n++;
    end while (state == ST_WAIT && n < 1000);
    check(n == 10, $sformatf("Wait lasted %0d cycles, expected 10", n));
    check(state == ST_IDLE && npeaks == 0, "Wait timeout drops the event");

    // ---- 4: large peak then afterpulse
    step(200); step(2000); step(1500); step(400); step(300); step(250);
    check(state == ST_PEAKDOWN, "large pulse falling");
    step(60);  check(state == ST_DECIDE, "large pulse decide");
    step(51);  check(state == ST_WAIT, "one peak not enough");
    step(300); step(200); step(50);
    step(250); step(200); step(50);
    check(state == ST_DECIDE, "third peak decided");
    step(51);  check(state == ST_TRIGGER, "large event triggers");
    repeat (41) step(51);
    check(state == ST_AFTERPULSE, "large amplitude enters AfterPulse");
    repeat (10) step(51);
    step(90);  check(state == ST_AFTERPULSE, "afterpulse crossing keeps AfterPulse");
    n = 0;
    do begin
      step(51);
      n++;
    end while (state == ST_AFTERPULSE && n < 1000);
    check(n == 21, $sformatf("AfterPulse ended %0d cycles after last crossing, expected 21", n));
    check(state == ST_IDLE, "back to IDLE after afterpulse");

    // ---- 5: veto blocks the trigger
    veto = 1'b1;
    foreach (fig_data[i]) begin
      step(fig_data[i]);
      check(state != ST_TRIGGER, "no trigger under veto");
    end
    check(state == ST_WAIT, "vetoed Decide goes to Wait");
    veto = 1'b0;
    repeat (12) step(51);
    check(state == ST_IDLE, "vetoed event dropped");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
