// tb_uart_rx: self-checking test of the 8N1 UART receiver.
//
// Runs at CLKS_PER_BIT = 16 to keep the simulation short. Sends 200 random
// bytes with random idle gaps and checks each received byte and that it is
// reported within one bit time of the middle of its stop bit; then checks that
// a frame with a low stop bit raises frame_err and no byte, and that a
// glitch shorter than half a bit on the idle line starts no frame.
module tb_uart_rx;
  localparam int CPB = 16;

  logic       clk = 1'b0;
  logic       rst_n;
  logic       rxd;
  logic [7:0] data;
  logic       valid, frame_err;

  int checks = 0;
  int failures = 0;
  int nvalid = 0;
  int nferr = 0;
  logic [7:0] last;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.*);

  always #10 clk = ~clk;

  always @(posedge clk) begin
    if (valid) begin
      nvalid <= nvalid + 1;
      last   <= data;
    end
    if (frame_err) nferr <= nferr + 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send(input logic [7:0] b, input logic stop_bit);
    rxd = 1'b0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      rxd = b[i];
      repeat (CPB) @(posedge clk);
    end
    rxd = stop_bit;
    repeat (CPB) @(posedge clk);
    rxd = 1'b1;
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] b;
    int n0;
    rxd   = 1'b1;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    for (int k = 0; k < 200; k++) begin
      b = 8'($urandom);
      n0 = nvalid;
      send(b, 1'b1);
      repeat (4) @(posedge clk);    // stop-bit middle + sync delay, < 1 bit
      check(nvalid == n0 + 1, $sformatf("byte %0d received", k));
      check(last == b, $sformatf("byte %0d: got %02h expected %02h", k, last, b));
      repeat ($urandom_range(0, 3 * CPB)) @(posedge clk);
    end
    check(nferr == 0, "no framing errors on good frames");

    n0 = nvalid;
    send(8'hA5, 1'b0);
    repeat (2 * CPB) @(posedge clk);
    check(nferr == 1, "bad stop bit flagged");
    check(nvalid == n0, "bad frame not delivered");

    n0 = nvalid;
    rxd = 1'b0;
    repeat (CPB / 4) @(posedge clk);
    rxd = 1'b1;
    repeat (12 * CPB) @(posedge clk);
    check(nvalid == n0 && nferr == 1, "glitch ignored");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
