// tb_efficiency_measurement: the two-board trigger-efficiency setup.
//
// To measure the trigger efficiency for S2 signals, two identical trigger
// boards watch the same majority-sum signal. Board A takes data with the
// normal settings. Board B runs the same logic with the trigger-wait relaxed
// (here 1 us, written over its UART), so that a second S2 that follows a
// triggered S2 within the same event ("after-trigger S2") still produces a
// trigger on B, while A is still in its dead time. The fraction of
// after-trigger S2s that B triggers on, as a function of their size, is the
// efficiency curve.
//
// Both boards are trigger_top at default parameters. Each of 300 events is a
// main S2 (3 peaks of height 300 above baseline) followed 4 us later by an
// after-trigger S2 of 1..5 peaks with a random height of 5..300 counts above
// the baseline of 51, each peak three samples (h/2, h, h/2) with four
// baseline samples between peaks. For every after-trigger S2 the test works
// out from the samples it generated whether the reset-value conditions (3
// peaks over threshold 68, 5 samples over threshold, largest sample >= 150)
// hold, and checks that board B triggers exactly then. Board A must trigger
// exactly once per event. The efficiency per size bin (sum of peak heights)
// is printed; it must be 0 in the smallest bin and 1 in the largest.
module tb_efficiency_measurement;
  import trig_pkg::*;

  localparam int CPB = 434;
  localparam int NEV = 300;
  localparam int NBIN = 8;
  localparam int BINW = 200;     // bin width in summed peak height

  logic        clk = 1'b0;
  logic        rst_n;
  sample_t     adc_data;
  logic        uart_a, uart_b;
  logic        trig_a, trig_b;
  trig_state_e state_a, state_b;
  logic        veto_a, veto_b, dis_a, dis_b;

  trigger_top board_a (.clk, .rst_n, .adc_data, .adc_otr(1'b0), .uart_rxd(uart_a),
                       .trig_out(trig_a), .state(state_a), .veto(veto_a), .discharge(dis_a));
  trigger_top board_b (.clk, .rst_n, .adc_data, .adc_otr(1'b0), .uart_rxd(uart_b),
                       .trig_out(trig_b), .state(state_b), .veto(veto_b), .discharge(dis_b));

  always #10 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int na = 0, nb = 0;
  logic trig_a_q = 1'b0, trig_b_q = 1'b0;

  always @(posedge clk) begin
    trig_a_q <= trig_a;
    trig_b_q <= trig_b;
    if (trig_a && !trig_a_q) na++;
    if (trig_b && !trig_b_q) nb++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic adc(input int s);
    adc_data = sample_t'(s);
    @(posedge clk);
    #1;
  endtask

  task automatic uart_byte(input logic [7:0] b);
    uart_b = 1'b0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      uart_b = b[i];
      repeat (CPB) @(posedge clk);
    end
    uart_b = 1'b1;
    repeat (2 * CPB) @(posedge clk);
  endtask

  // An S2 of k peaks of height h above baseline; returns whether the default
  // trigger conditions hold for it.
  task automatic s2(input int k, input int h, output bit pass);
    int s[3];
    int npk = 0, tot = 0, amp = 0;
    s[0] = 51 + h / 2; s[1] = 51 + h; s[2] = 51 + h / 2;
    for (int p = 0; p < k; p++) begin
      bit any = 1'b0;
      foreach (s[i]) begin
        adc(s[i]);
        if (s[i] > 68) begin
          tot++;
          any = 1'b1;
          if (s[i] > amp) amp = s[i];
        end
      end
      if (any) npk++;
      repeat (4) adc(51);
    end
    pass = (npk >= 3) && (tot >= 5) && (amp >= 150);
  endtask

  initial begin
    #2_000_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  tot_bin[NBIN], hit_bin[NBIN];
    int  na0, nb0, k, h, bin, npred;
    bit  pass, dummy;
    foreach (tot_bin[i]) begin tot_bin[i] = 0; hit_bin[i] = 0; end
    npred = 0;
    adc_data = 12'd51;
    uart_a = 1'b1;
    uart_b = 1'b1;
    rst_n  = 1'b0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;

    // Board B: relaxed trigger-wait of 50 cycles (1 us).
    uart_byte(REG_TRIG_WAIT); uart_byte(8'h00); uart_byte(8'h00); uart_byte(8'd50);
    check(board_b.cfg.trig_wait == 24'd50, "board B trigger-wait relaxed");
    check(board_a.cfg.trig_wait == 24'd100_000, "board A trigger-wait at default");

    for (int ev = 0; ev < NEV; ev++) begin
      na0 = na;
      nb0 = nb;
      s2(3, 300, dummy);
      repeat (200) adc(51);
      check(nb == nb0 + 1, $sformatf("event %0d: board B triggers on the main S2", ev));
      k = $urandom_range(1, 5);
      h = $urandom_range(5, 300);
      s2(k, h, pass);
      repeat (200) adc(51);
      bin = (k * h) / BINW;
      if (bin >= NBIN) bin = NBIN - 1;
      tot_bin[bin]++;
      if (nb == nb0 + 2) hit_bin[bin]++;
      if (pass) npred++;
      check((nb - nb0 - 1) == (pass ? 1 : 0),
            $sformatf("event %0d: after-trigger S2 k=%0d h=%0d, board B %0d trigger(s), expected %0d",
                      ev, k, h, nb - nb0 - 1, pass));
      repeat (100_000) adc(51);   // let board A's trigger-wait run out
      check(na == na0 + 1, $sformatf("event %0d: board A triggers once", ev));
    end

    $display("after-trigger S2s predicted to pass: %0d of %0d", npred, NEV);
    $display("efficiency by summed peak height (bin width %0d counts):", BINW);
    foreach (tot_bin[i])
      if (tot_bin[i] > 0)
        $display("  [%4d,%4d): %3d of %3d  = %0.2f", i * BINW, (i + 1) * BINW,
                 hit_bin[i], tot_bin[i], real'(hit_bin[i]) / real'(tot_bin[i]));
    check(tot_bin[0] > 0 && hit_bin[0] == 0, "smallest signals never trigger");
    check(tot_bin[NBIN-1] > 0 && hit_bin[NBIN-1] == tot_bin[NBIN-1], "largest signals always trigger");
    check(npred > 0 && npred < NEV, "both outcomes occur");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
