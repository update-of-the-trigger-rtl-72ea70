// tb_trigger_pulse: checks the 180 ns (9-cycle) trigger output pulse.
//
// Fires single strobes with random spacing and checks, cycle by cycle, that
// the output rises on the edge after the strobe and stays high for exactly
// 9 cycles of the 20 ns clock (180 ns measured in simulation time), and that
// a strobe during a pulse restarts the 9-cycle count.
module tb_trigger_pulse;
  logic clk = 1'b0;
  logic rst_n;
  logic fire;
  logic trig_out;

  int checks = 0;
  int failures = 0;

  trigger_pulse dut (.*);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #200_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    time t_rise, t_fall;
    fire  = 1'b0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(!trig_out, "low after reset");

    repeat (20) begin
      repeat (2 + $urandom_range(0, 15)) @(posedge clk);
      #1 fire = 1'b1;
      @(posedge clk);
      #1 fire = 1'b0;
      t_rise = $time;
      for (int i = 0; i < 9; i++) begin
        check(trig_out, $sformatf("high in cycle %0d of the pulse", i));
        @(posedge clk);
        #1;
      end
      t_fall = $time;
      check(!trig_out, "low after 9 cycles");
      check(t_fall - t_rise == 180, $sformatf("pulse %0t long, expected 180 ns", t_fall - t_rise));
    end

    // Restart: a second strobe 4 cycles into a pulse gives 4 + 9 cycles high.
    #1 fire = 1'b1;
    @(posedge clk); #1 fire = 1'b0;
    repeat (3) @(posedge clk);
    #1 fire = 1'b1;
    @(posedge clk); #1 fire = 1'b0;
    for (int i = 0; i < 9; i++) begin
      check(trig_out, "restarted pulse high");
      @(posedge clk);
      #1;
    end
    check(!trig_out, "restarted pulse ends after 9 cycles");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
