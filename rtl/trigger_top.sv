// trigger_top: FPGA top level of the majority-sum trigger.
//
// The summed majority signal of all waveform digitizers is digitised by a
// 12-bit ADC at 50 MS/s and analysed sample by sample in the FPGA, which
// runs entirely on one 50 MHz clock. adc_capture registers the ADC bus;
// trigger_fsm finds peaks, accumulates the event's peak count, time over
// threshold and peak amplitude and decides; discharge_veto watches the same
// above-threshold flag for long discharge pulse trains and blocks triggers;
// trigger_pulse turns a decision into the 180 ns TTL trigger output. The
// thresholds and wait times live in config_regs and are written over the
// UART port (uart_rx).
//
// Ports: clk (50 MHz), rst_n (synchronous, active low), the ADC bus
// adc_data/adc_otr, the UART line uart_rxd, and the TTL trigger trig_out,
// which off-board level converters turn into NIM/ECL for the downstream
// trigger logic and scaler. state, veto and discharge are brought out as
// status/monitor signals.
//
// Latency: a sample on the ADC pins at edge n reaches the state machine after
// edge n+2 (adc_capture, then the state register); if it is a passing Decide
// sample, Trigger follows after edge n+3 and trig_out rises after edge n+4
// for 9 cycles (180 ns).
module trigger_top
  import trig_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 434,        // 115200 baud at 50 MHz
  parameter int unsigned UART_TIMEOUT = 1_000_000,  // 20 ms
  parameter int unsigned TRIG_WIDTH   = 9           // 180 ns
) (
  input  logic        clk,
  input  logic        rst_n,
  input  sample_t     adc_data,
  input  logic        adc_otr,
  input  logic        uart_rxd,
  output logic        trig_out,
  output trig_state_e state,
  output logic        veto,
  output logic        discharge
);

  sample_t   sample, sample_q;
  trig_cfg_t cfg;
  logic      above, trig_strobe;
  logic      cfg_wr_done;
  logic [7:0] rx_data;
  logic      rx_valid, rx_frame_err;
  count_t    npeaks;
  time_t     tot;
  sample_t   amp;

  adc_capture u_adc (
    .clk, .rst_n, .adc_data, .adc_otr, .sample
  );

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .rxd(uart_rxd), .data(rx_data), .valid(rx_valid),
    .frame_err(rx_frame_err)
  );

  config_regs #(.TIMEOUT(UART_TIMEOUT)) u_cfg (
    .clk, .rst_n, .rx_data, .rx_valid, .cfg, .wr_done(cfg_wr_done)
  );

  trigger_fsm u_fsm (
    .clk, .rst_n, .sample, .cfg, .veto, .above, .state, .sample_q,
    .trig_strobe, .npeaks, .tot, .amp
  );

  discharge_veto u_veto (
    .clk, .rst_n, .above, .cfg, .veto, .discharge
  );

  trigger_pulse #(.WIDTH(TRIG_WIDTH)) u_pulse (
    .clk, .rst_n, .fire(trig_strobe), .trig_out
  );

endmodule
