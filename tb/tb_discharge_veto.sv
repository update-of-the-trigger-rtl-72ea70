// tb_discharge_veto: self-checking test of the discharge identification.
//
// Drives the above-threshold flag directly with small settings
// (dis_tot = 20 samples, dis_gap = 8 cycles, dis_veto = 50 cycles):
//  - isolated short pulses separated by long gaps never add up to a discharge;
//  - a train of short pulses with gaps shorter than dis_gap is identified on
//    exactly its 20th above-threshold sample, with one discharge strobe;
//  - the veto stays high while the train goes on and drops exactly dis_veto
//    cycles after the last above-threshold sample;
//  - after the veto the accumulator starts from zero again.
module tb_discharge_veto;
  import trig_pkg::*;

  logic      clk = 1'b0;
  logic      rst_n;
  logic      above;
  trig_cfg_t cfg;
  logic      veto, discharge;

  int checks = 0;
  int failures = 0;
  int nabove = 0;
  int ndis = 0;

  discharge_veto dut (.*);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic step(input bit a);
    above = a;
    @(posedge clk);
    if (a) nabove++;
    #1;
    if (discharge) ndis++;
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    cfg = CFG_DEFAULT;
    cfg.dis_tot  = 24'd20;
    cfg.dis_gap  = 24'd8;
    cfg.dis_veto = 24'd50;
    above = 1'b0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Isolated pulses: 5 above, 12 quiet, ten times (50 above in all).
    repeat (10) begin
      repeat (5) step(1);
      repeat (12) step(0);
    end
    check(!veto && ndis == 0, "isolated pulses are not a discharge");

    // Train: 3 above, 4 quiet, repeated; identified on the 20th sample.
    nabove = 0;
    n = 0;
    while (!veto && n < 200) begin
      step((n % 7) < 3);
      n++;
    end
    check(veto, "train identified");
    check(nabove == 20, $sformatf("identified after %0d above samples, expected 20", nabove));
    check(ndis == 1, "one discharge strobe");

    // Keep the train going for a while: veto must stay up.
    repeat (100) begin
      step((n % 7) < 3);
      n++;
      check(veto, "veto held during train");
    end
    // One last above-threshold sample re-arms the veto; then go quiet.
    step(1);
    n = 0;
    while (veto && n < 1000) begin
      step(0);
      n++;
    end
    check(n == 50, $sformatf("veto dropped %0d cycles after the last above sample, expected 50", n));

    // Fresh accumulation: 19 above in a train is not enough.
    ndis = 0;
    repeat (19) begin step(1); step(0); end
    check(!veto && ndis == 0, "accumulator cleared after quiet gap");
    step(1);
    check(veto && ndis == 1, "20th sample of new train identifies again");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
