// trigger_pulse: forms the TTL trigger output pulse.
//
// The trigger state machine marks a trigger with a one-cycle strobe. The
// board's output is a fixed-width TTL pulse, 180 ns long in the published
// timing diagram, i.e. WIDTH = 9 cycles of the 20 ns clock. A down-counter is
// loaded on the strobe and the output is high while it is non-zero; the
// output is registered, so it rises on the clock edge after the strobe and
// stays high for exactly WIDTH cycles. A strobe that arrives while a pulse is
// running restarts the count (the trigger dead time makes this impossible in
// the full design).
//
// The 180 ns width comes from the published timing diagram; registering the
// output and the restart rule are this design's choices.
module trigger_pulse #(
  parameter int unsigned WIDTH = 9
) (
  input  logic clk,
  input  logic rst_n,
  input  logic fire,
  output logic trig_out
);

  localparam int unsigned CW = $clog2(WIDTH + 1);
  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk) begin
    if (!rst_n)               cnt_q <= '0;
    else if (fire)            cnt_q <= CW'(WIDTH);
    else if (cnt_q != '0)     cnt_q <= cnt_q - CW'(1);
  end

  assign trig_out = (cnt_q != '0);

endmodule
