// tb_config_regs: checks the UART command decoder and register file.
//
// Feeds byte strobes directly (TIMEOUT = 100 cycles). Checks the reset
// values, then writes a random value to every register with the 4-byte
// command (address, value MSB first) and compares the whole configuration
// record with a model record updated by the test; checks that an unknown
// address changes nothing and gives no wr_done, and that a command whose
// bytes are separated by more than TIMEOUT cycles is discarded and the next
// command is still decoded correctly.
module tb_config_regs;
  import trig_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n;
  logic [7:0] rx_data;
  logic       rx_valid;
  trig_cfg_t  cfg;
  logic       wr_done;

  int checks = 0;
  int failures = 0;
  int ndone = 0;

  config_regs #(.TIMEOUT(100)) dut (.*);

  always #10 clk = ~clk;
  always @(posedge clk) if (wr_done) ndone <= ndone + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic put(input logic [7:0] b, input int gap);
    rx_data  = b;
    rx_valid = 1'b1;
    @(posedge clk);
    #1 rx_valid = 1'b0;
    repeat (gap) @(posedge clk);
    #1;
  endtask

  task automatic write(input logic [7:0] a, input logic [23:0] v);
    put(a, 3); put(v[23:16], 3); put(v[15:8], 3); put(v[7:0], 3);
  endtask

  function automatic trig_cfg_t model_write(trig_cfg_t c, logic [7:0] a, logic [23:0] v);
    case (a)
      8'h00: c.threshold = v[11:0];
      8'h01: c.npeak_min = v[15:0];
      8'h02: c.tot_min   = v;
      8'h03: c.amp_min   = v[11:0];
      8'h04: c.peak_wait = v;
      8'h05: c.trig_wait = v;
      8'h06: c.large_amp = v[11:0];
      8'h07: c.ap_quiet  = v;
      8'h08: c.dis_tot   = v;
      8'h09: c.dis_gap   = v;
      8'h0A: c.dis_veto  = v;
      default: ;
    endcase
    return c;
  endfunction

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trig_cfg_t  m;
    logic [23:0] v;
    int n0;
    rx_data  = '0;
    rx_valid = 1'b0;
    rst_n    = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(cfg.threshold == 12'd68, "reset threshold 68");
    check(cfg.trig_wait == 24'd100_000, "reset trigger-wait 2 ms");
    check(cfg.peak_wait == 24'd25, "reset peak-wait 500 ns");
    m = cfg;

    for (int r = 0; r < 3; r++) begin
      for (int a = 0; a < 11; a++) begin
        v = 24'($urandom);
        n0 = ndone;
        write(8'(a), v);
        m = model_write(m, 8'(a), v);
        check(ndone == n0 + 1, $sformatf("wr_done for address %0d", a));
        check(cfg == m, $sformatf("register file after writing address %0d", a));
      end
    end

    n0 = ndone;
    write(8'h3C, 24'h123456);
    check(cfg == m && ndone == n0, "unknown address ignored");

    // Partial command, then silence longer than the timeout.
    put(8'h00, 3); put(8'h00, 150);
    write(8'h00, 24'h000050);
    m = model_write(m, 8'h00, 24'h000050);
    check(cfg == m, "timeout resynchronises the command stream");
    check(cfg.threshold == 12'd80, "threshold written to 80");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
