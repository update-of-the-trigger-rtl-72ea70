// tb_trigger_top: end-to-end test of the trigger FPGA at its default settings.
//
// The top is instantiated with all parameters at their defaults (50 MHz
// clock, 115200-baud UART, 180 ns trigger pulse) and the configuration
// registers at their reset values (threshold 68, 3 peaks, ToT 5 samples,
// amplitude 150, peak-wait 500 ns, trigger-wait 2 ms, afterpulse quiet
// 50 us, discharge ToT 1000 samples, gap 5 us, veto 10 ms). ADC samples are
// driven on the pins, the TTL output is watched, and the UART line is driven
// bit by bit. Scenarios, in order:
//   A  the published three-peak S2 example triggers once; the pulse rises a
//      fixed 5 cycles after the last (Decide) sample reaches the pins and is
//      180 ns wide;
//   B  a second S2 inside the 2 ms trigger-wait gives no trigger; one after
//      it does, and the gap between the two triggers is checked;
//   C  a single S1-like peak gives no trigger and the Wait times out;
//   D  a large S2 (ADC out of range) followed by a 6 ms afterpulse tail gives
//      exactly one trigger, and the machine stays in AfterPulse until 50 us
//      after the tail ends;
//   E  a 8 ms discharge train of small pulses gives one trigger before it is
//      identified and none after, although without the veto it would have
//      triggered again after every trigger-wait;
//   F  over the UART the trigger-wait is relaxed to 1 us and the peak count
//      lowered to 1, after which single peaks 2 us apart each trigger.
// Every mechanism (trigger, dead time, Wait timeout, afterpulse wait,
// discharge veto, out-of-range sample, UART register write) is counted and a
// mechanism that never happened counts as a failure.
module tb_trigger_top;
  import trig_pkg::*;

  localparam int CPB = 434;

  logic        clk = 1'b0;
  logic        rst_n;
  sample_t     adc_data;
  logic        adc_otr;
  logic        uart_rxd;
  logic        trig_out;
  trig_state_e state;
  logic        veto, discharge;

  int checks = 0;
  int failures = 0;

  trigger_top dut (.*);

  always #10 clk = ~clk;

  // ---------------- monitors
  longint cyc = 0;
  int     n_trig = 0;          // rising edges of trig_out
  longint t_rise = 0, t_prev_rise = 0;
  int     last_width = 0, wcount = 0;
  bit     trig_q = 1'b0;
  int     n_timeout = 0, n_afterpulse = 0, n_veto_block = 0, n_discharge = 0;
  int     n_deadtime_block = 0, n_otr = 0, n_cfg_write = 0;
  trig_state_e st_q = ST_IDLE;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    trig_q <= trig_out;
    st_q   <= state;
    if (trig_out && !trig_q) begin
      n_trig++;
      t_prev_rise = t_rise;
      t_rise = cyc;
      wcount = 1;
    end else if (trig_out) begin
      wcount++;
    end else if (trig_q) begin
      last_width = wcount;
    end
    if (st_q == ST_WAIT && state == ST_IDLE) n_timeout++;
    if (st_q != ST_AFTERPULSE && state == ST_AFTERPULSE) n_afterpulse++;
    if (st_q == ST_DECIDE && state != ST_TRIGGER && veto) n_veto_block++;
    if (discharge) n_discharge++;
    // A pulse starting inside the trigger-wait: the machine ignores it.
    if (state == ST_TRIGWAIT && dut.above && dut.sample_q <= dut.cfg.threshold)
      n_deadtime_block++;
    if (adc_otr) n_otr++;
    if (dut.cfg_wr_done) n_cfg_write++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  // Drive one sample on the pins for one clock.
  task automatic adc(input int s, input bit otr = 1'b0);
    adc_data = sample_t'(s);
    adc_otr  = otr;
    @(posedge clk);
    #1;
  endtask

  task automatic baseline(input longint n);
    for (longint i = 0; i < n; i++) adc(51);
  endtask

  // The published three-peak example (columns 3..14 of its timing diagram).
  task automatic s2_example();
    int d[12] = '{145, 189, 100, 52, 53, 192, 145, 55, 51, 198, 154, 62};
    foreach (d[i]) adc(d[i]);
  endtask

  // One small pulse: three samples above threshold.
  task automatic small_pulse(input int a);
    adc(a - 20); adc(a); adc(a - 30);
  endtask

  task automatic uart_byte(input logic [7:0] b);
    uart_rxd = 1'b0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      uart_rxd = b[i];
      repeat (CPB) @(posedge clk);
    end
    uart_rxd = 1'b1;
    repeat (2 * CPB) @(posedge clk);
  endtask

  task automatic uart_write(input logic [7:0] a, input logic [23:0] v);
    uart_byte(a); uart_byte(v[23:16]); uart_byte(v[15:8]); uart_byte(v[7:0]);
  endtask

  initial begin
    #1_000_000_000;       // 50 M cycles
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_decide;
    int n0;
    adc_data = 12'd51;
    adc_otr  = 1'b0;
    uart_rxd = 1'b1;
    rst_n    = 1'b0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    baseline(20);

    // ---------------- A: published example
    n0 = n_trig;
    s2_example();
    t_decide = cyc;            // edge count when the Decide sample was taken
    baseline(20);
    check(n_trig == n0 + 1, "A: example triggers once");
    check(t_rise - t_decide == 4,
          $sformatf("A: trigger %0d cycles after the Decide sample's edge, expected 4", t_rise - t_decide));
    check(last_width == 9, $sformatf("A: trigger %0d cycles wide, expected 9 (180 ns)", last_width));

    // ---------------- B: second S2 inside trigger-wait, then after it
    baseline(30_000);
    s2_example();
    baseline(20);
    check(n_trig == n0 + 1, "B: no trigger inside trigger-wait");
    baseline(100_000 - 30_000);
    s2_example();
    baseline(20);
    check(n_trig == n0 + 2, "B: trigger after trigger-wait");
    check(t_rise - t_prev_rise > 100_000, "B: triggers at least 2 ms apart");
    baseline(100_100);
    check(state == ST_IDLE, "B: idle again");

    // ---------------- C: single S1-like peak
    n0 = n_trig;
    small_pulse(180);
    baseline(40);
    check(n_trig == n0, "C: single peak does not trigger");
    check(n_timeout > 0, "C: Wait timed out");
    check(state == ST_IDLE, "C: idle");

    // ---------------- D: large S2 with ADC out of range, long afterpulse
    n0 = n_trig;
    adc(900); adc(2500); adc(4095, 1'b1); adc(4095, 1'b1); adc(3500); adc(1200);
    adc(300); adc(60); adc(400); adc(200); adc(60); adc(300); adc(150); adc(60);
    // 6 ms tail of afterpulses: a small pulse every 20 us.
    for (int k = 0; k < 300; k++) begin
      small_pulse(120);
      baseline(997);
    end
    check(n_trig == n0 + 1, "D: one trigger for a large S2 with afterpulses");
    check(state == ST_AFTERPULSE, "D: still waiting on afterpulses after trigger-wait");
    baseline(1_400);   // 997 + 1400 quiet cycles: just under 2500
    check(state == ST_AFTERPULSE, "D: still in AfterPulse before 50 us of quiet");
    baseline(200);
    check(state == ST_IDLE, "D: back to IDLE after 50 us of quiet");
    check(n_afterpulse == 1, "D: AfterPulse entered once");

    // ---------------- E: discharge train, 8 ms
    n0 = n_trig;
    for (int k = 0; k < 400_000 / 13; k++) begin
      small_pulse(170);
      baseline(10);
    end
    check(n_discharge >= 1, "E: discharge identified");
    check(n_trig == n0 + 1, $sformatf("E: %0d triggers in the discharge, expected 1", n_trig - n0));
    check(n_veto_block > 0, "E: Decide blocked by the veto");
    check(veto, "E: veto active at end of train");
    baseline(499_000);
    check(veto, "E: veto still active just before 10 ms");
    baseline(2_000);
    check(!veto, "E: veto released 10 ms after the train");

    // ---------------- F: UART reconfiguration (relaxed trigger-wait)
    n0 = n_cfg_write;
    uart_write(REG_TRIG_WAIT, 24'd50);
    uart_write(REG_NPEAK_MIN, 24'd1);
    uart_write(REG_TOT_MIN, 24'd3);
    check(n_cfg_write == n0 + 3, "F: three UART writes decoded");
    check(dut.cfg.trig_wait == 24'd50 && dut.cfg.npeak_min == 16'd1,
          "F: registers hold the written values");
    n0 = n_trig;
    for (int k = 0; k < 10; k++) begin
      small_pulse(200);
      baseline(97);
    end
    check(n_trig == n0 + 10, $sformatf("F: %0d triggers for 10 single peaks, expected 10", n_trig - n0));

    // ---------------- mechanism coverage
    $display("mechanisms: triggers=%0d timeouts=%0d afterpulse=%0d discharge=%0d veto_blocks=%0d otr_samples=%0d deadtime_peaks=%0d uart_writes=%0d",
             n_trig, n_timeout, n_afterpulse, n_discharge, n_veto_block, n_otr,
             n_deadtime_block, n_cfg_write);
    check(n_trig > 0, "mechanism: trigger");
    check(n_timeout > 0, "mechanism: peak-wait timeout");
    check(n_afterpulse > 0, "mechanism: afterpulse wait");
    check(n_discharge > 0 && n_veto_block > 0, "mechanism: discharge veto");
    check(n_otr > 0, "mechanism: out-of-range sample");
    check(n_deadtime_block > 0, "mechanism: peak ignored in trigger-wait");
    check(n_cfg_write > 0, "mechanism: UART register write");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
