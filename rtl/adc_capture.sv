// adc_capture: brings the AD9226 sample bus into the FPGA.
//
// The ADC subboard converts the majority-sum signal at 50 MS/s with 12-bit
// resolution, clocked from the same 50 MHz oscillator as the FPGA. Its
// parallel output (straight binary) and its out-of-range flag are taken into
// an input register (meant to be placed in the I/O blocks) and then a second
// register. When the ADC flags out-of-range the sample is forced to full
// scale on the side given by its MSB (4095 above range, 0 below), so that a
// saturated pulse is never read as a mid-scale value.
//
// Latency: two clock cycles from the pins to `sample`.
//
// From the published description: the 12-bit, 50 MS/s ADC feeding the FPGA.
// The two-stage capture and the out-of-range rule are this design's own.
module adc_capture
  import trig_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t adc_data,
  input  logic    adc_otr,
  output sample_t sample
);

  sample_t data_q;
  logic    otr_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      data_q <= '0;
      otr_q  <= 1'b0;
      sample <= '0;
    end else begin
      data_q <= adc_data;
      otr_q  <= adc_otr;
      if (otr_q) sample <= data_q[SAMPLE_W-1] ? '1 : '0;
      else       sample <= data_q;
    end
  end

endmodule
